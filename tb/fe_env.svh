// fe_env.svh: shared test environment for the benches of the curve-level
// FSMs.  Included inside a bench module, it provides a toy-size datapath -
// register file and masked ALU for p = 4*3*5*7*11*13*17 - 1 = 1021019 with
// two 32-bit words (R = 2^64) - the command / response wires cmd and rsp for
// the FSM under test, a clock and reset, check() bookkeeping, and a
// reference model: modular arithmetic on longint, conversion to and from the
// Montgomery form the register file holds, and x-only Montgomery-curve
// doubling, differential addition, ladder and odd-degree isogeny with the
// curve given by its affine coefficient A.
  import csidh_pkg::*;
  localparam int NW = 2, W = 64;
  localparam logic [W-1:0] P    = 64'hf945b;
  localparam logic [W-1:0] PINV = 64'he393e804e98c842d;
  localparam logic [W-1:0] R2   = 64'ha106f;
  localparam logic [W-1:0] MONE = 64'hf534d;
  localparam longint PL = 64'd1021019;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  fe_cmd_t cmd;
  fe_rsp_t rsp;
  logic [W-1:0] rnd, ext_in, out_value, alu_a, alu_b, alu_result;
  logic alu_start, alu_done, alu_zero;
  alu_op_e alu_op;
  initial ext_in = '0;
  always @(posedge clk) rnd <= {$urandom, $urandom} % P;

  cu_regfile #(.NW(NW), .R2(R2), .MONE(MONE)) u_rf (
    .clk, .rst_n, .cmd, .rsp, .ext_in, .rnd, .alu_start, .alu_op, .alu_a, .alu_b,
    .alu_done, .alu_result, .alu_zero, .out_value
  );
  alu #(.NW(NW), .P(P), .PINV(PINV)) u_alu (
    .clk, .rst_n, .start(alu_start), .op(alu_op), .a(alu_a), .b(alu_b), .rnd,
    .done(alu_done), .result(alu_result), .zero(alu_zero)
  );

  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic longint addm(input longint a, input longint b); return (a + b) % PL; endfunction
  function automatic longint subm(input longint a, input longint b); return (a - b + PL) % PL; endfunction
  function automatic longint mulm(input longint a, input longint b); return (a * b) % PL; endfunction
  function automatic longint powm(input longint a, input longint e);
    longint r = 1, b = a % PL;
    while (e > 0) begin
      if (e[0]) r = mulm(r, b);
      b = mulm(b, b);
      e = e >> 1;
    end
    return r;
  endfunction
  function automatic longint invm(input longint a); return powm(a, PL - 2); endfunction
  function automatic longint rndm(); return longint'($urandom) % PL; endfunction

  // register file <-> plain values
  function automatic logic [W-1:0] to_m(input longint x);
    logic [2*W-1:0] t;
    t = {64'(x), 64'd0};
    return W'(t % {64'd0, P});
  endfunction
  function automatic longint from_m(input logic [W-1:0] y);
    return mulm(longint'(y % P), invm(longint'(MONE)));
  endfunction
  task automatic setr(input raddr_t r, input longint x); u_rf.rf[r] = to_m(x); endtask
  function automatic longint getr(input raddr_t r); return from_m(u_rf.rd(r)); endfunction

  // x-only arithmetic, curve y^2 = x^3 + A x^2 + x, points as {X, Z}
  typedef struct { longint x; longint z; } pt_t;
  function automatic pt_t xdbl(input pt_t p, input longint a);
    longint t0, t1, t, a24p, z2;
    pt_t r;
    a24p = addm(a, 2);
    t0 = mulm(addm(p.x, p.z), addm(p.x, p.z));
    t1 = mulm(subm(p.x, p.z), subm(p.x, p.z));
    z2 = mulm(4, t1);
    r.x = mulm(z2, t0);
    t = subm(t0, t1);
    r.z = mulm(addm(z2, mulm(a24p, t)), t);
    return r;
  endfunction
  function automatic pt_t xadd(input pt_t p, input pt_t q, input pt_t d);
    longint u, v;
    pt_t r;
    u = mulm(subm(p.x, p.z), addm(q.x, q.z));
    v = mulm(addm(p.x, p.z), subm(q.x, q.z));
    r.x = mulm(d.z, mulm(addm(u, v), addm(u, v)));
    r.z = mulm(d.x, mulm(subm(u, v), subm(u, v)));
    return r;
  endfunction
  function automatic pt_t xmul_ref(input pt_t p, input longint k, input longint a);
    pt_t r0, r1;
    int top;
    r0.x = 1; r0.z = 0; r1 = p;
    top = 0;
    for (int b = 0; b < 40; b++) if (k[b]) top = b;
    for (int b = top; b >= 0; b--)
      if (k[b]) begin r0 = xadd(r0, r1, p); r1 = xdbl(r1, a); end
      else begin r1 = xadd(r0, r1, p); r0 = xdbl(r0, a); end
    return r0;
  endfunction
  // same projective point?
  function automatic bit same(input pt_t p, input pt_t q);
    return mulm(p.x, q.z) == mulm(q.x, p.z);
  endfunction
  // odd-degree isogeny with kernel <k>: new A and the image of p
  task automatic iso_ref(input longint a, input pt_t k, input longint l, input pt_t p,
                         output longint an, output pt_t pn);
    pt_t m_prev, m_cur, m_nxt;
    longint sp = 1, sm = 1, pp = 1, pm = 1, u, v, aa, dd;
    m_cur = k;
    m_prev = k;
    for (longint i = 1; i <= (l - 1) / 2; i++) begin
      sp = mulm(sp, addm(m_cur.x, m_cur.z));
      sm = mulm(sm, subm(m_cur.x, m_cur.z));
      u = mulm(subm(p.x, p.z), addm(m_cur.x, m_cur.z));
      v = mulm(addm(p.x, p.z), subm(m_cur.x, m_cur.z));
      pp = mulm(pp, addm(u, v));
      pm = mulm(pm, subm(u, v));
      m_nxt = (i == 1) ? xdbl(k, a) : xadd(m_cur, k, m_prev);
      m_prev = m_cur;
      m_cur = m_nxt;
    end
    pn.x = mulm(p.x, mulm(pp, pp));
    pn.z = mulm(p.z, mulm(pm, pm));
    aa = mulm(powm(addm(a, 2), l), powm(sp, 8));
    dd = mulm(powm(subm(a, 2), l), powm(sm, 8));
    an = mulm(mulm(2, addm(aa, dd)), invm(subm(aa, dd)));
  endtask
  // curve coefficient held in the register file as (A24 : C24)
  function automatic longint curve_a(input raddr_t ra24, input raddr_t rc24);
    return mulm(subm(mulm(4, getr(ra24)), mulm(2, getr(rc24))), invm(getr(rc24)));
  endfunction
  task automatic set_curve(input longint a);
    setr(R_A24, addm(a, 2));
    setr(R_C24, 4);
  endtask
  // random point on the curve (twist = 0) or its twist (twist = 1)
  function automatic longint legendre(input longint x); return powm(x, (PL - 1) / 2); endfunction
  function automatic longint rhs(input longint x, input longint a);
    return mulm(x, addm(addm(mulm(x, x), mulm(a, x)), 1));
  endfunction
