// tb_xisog: checks the odd-degree isogeny FSM on the toy-size datapath
// (fe_env.svh).  For each prime l in 3..17 and several curves, a kernel point
// K of order l is made as [(p+1)/l] of a random point; the FSM's image curve
// (A24' : C24'), converted to the affine A', and the image phi(P) of a random
// point are compared with the reference isogeny.  The fault check must stay
// quiet for a proper kernel and must fire when K does not have order l (a
// random point).  The operation count per degree is checked to be the same
// for every run with the same l (it must not depend on the data).
module tb_xisog;
  `include "fe_env.svh"
  logic start = 0, done, fault;
  logic [LBITS-1:0] l;
  fe_cmd_t xcmd;
  xisog dut (.clk, .rst_n, .start, .l, .done, .fault, .cmd(xcmd), .rsp);
  assign cmd = xcmd;

  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nops = 0;
  always @(posedge clk) if (cmd.valid) nops++;
  int ops_of [18];

  task automatic run(input longint ll, input longint a, input pt_t k, input pt_t p,
                     input bit proper);
    longint an;
    pt_t pn, got;
    int n0;
    set_curve(a);
    setr(R_MX, k.x); setr(R_MZ, k.z);
    setr(R_PX, p.x); setr(R_PZ, p.z);
    @(negedge clk);
    l = LBITS'(ll); start = 1; n0 = nops;
    @(negedge clk) start = 0;
    while (!done) begin @(posedge clk); #1; end
    if (ops_of[ll] == 0) ops_of[ll] = nops - n0;
    check($sformatf("l=%0d operation count constant", ll), ops_of[ll] == nops - n0);
    if (proper) begin
      iso_ref(a, k, ll, p, an, pn);
      got.x = getr(R_NPX); got.z = getr(R_NPZ);
      check($sformatf("l=%0d image curve", ll), curve_a(R_NA24, R_NC24) == an);
      check($sformatf("l=%0d image point", ll), same(got, pn));
      check($sformatf("l=%0d no fault", ll), fault == 1'b0);
      check("inputs kept", getr(R_A24) == addm(a, 2) && getr(R_MX) == k.x);
    end else begin
      check($sformatf("l=%0d bad kernel flagged", ll), fault == 1'b1);
    end
  endtask

  longint curves [3] = '{0, 265791, 90879};
  longint ls [6] = '{3, 5, 7, 11, 13, 17};
  pt_t k, p, q;
  initial begin
    for (int i = 0; i < 18; i++) ops_of[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3; c++)
      for (int i = 0; i < 6; i++) begin
        // kernel of exact order l
        do begin
          q.x = rndm(); q.z = 1;
          k = xmul_ref(q, (PL + 1) / ls[i], curves[c]);
        end while (k.z == 0);
        p.x = rndm(); p.z = 1;
        run(ls[i], curves[c], k, p, 1'b1);
        // a point that is not of order l
        q.x = rndm(); q.z = 1;
        if (xmul_ref(q, ls[i], curves[c]).z != 0) run(ls[i], curves[c], q, p, 1'b0);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
