// tb_xtwist: checks the curve-or-twist test on the toy-size datapath
// (fe_env.svh).  For random x and random curves, held projectively as
// (A24 : C24) scaled by a random factor, qr must equal the Legendre symbol of
// x^3 + A x^2 + x computed in the bench, and rhs_zero must be set for x = 0.
// Both outcomes must occur.  The operation count must not depend on x.
module tb_xtwist;
  `include "fe_env.svh"
  logic start = 0, done, qr, rhs_zero;
  fe_cmd_t xcmd;
  xtwist #(.NW(NW), .P(P)) dut (.clk, .rst_n, .start, .done, .qr, .rhs_zero, .cmd(xcmd), .rsp);
  assign cmd = xcmd;

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nops = 0, ops0 = -1, n_on = 0, n_tw = 0;
  always @(posedge clk) if (cmd.valid) nops++;

  task automatic run(input longint x, input longint a);
    longint s, w;
    int n0;
    s = rndm() | 1;                       // projective scaling
    setr(R_A24, mulm(s, addm(a, 2)));
    setr(R_C24, mulm(s, 4));
    setr(R_TWX, x);
    @(negedge clk);
    start = 1; n0 = nops;
    @(negedge clk) start = 0;
    while (!done) begin @(posedge clk); #1; end
    w = rhs(x, a);
    if (w == 0) check("rhs zero flagged", rhs_zero == 1'b1);
    else begin
      check("rhs nonzero", rhs_zero == 1'b0);
      check($sformatf("x=%0d A=%0d on curve/twist", x, a), qr == (legendre(w) == 1));
      if (qr) n_on++; else n_tw++;
    end
    if (ops0 < 0) ops0 = nops - n0;
    check("operation count constant", nops - n0 == ops0);
  endtask

  longint curves [3] = '{0, 265791, 90879};
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 30; i++) run(rndm(), curves[i % 3]);
    run(0, 0);
    check("points on the curve seen", n_on > 0);
    check("points on the twist seen", n_tw > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
