// tb_xdbladd: checks the combined doubling / differential addition on the
// toy-size datapath (fe_env.svh).  With a random base point B on a random
// curve, P = [m+1]B, Q = [m]B and difference D = B (in R_LDX / R_LDZ), the
// FSM must leave [2]P in P's registers and P + Q = [2m+1]B in Q's, compared
// projectively with the reference.  The register addresses are swapped on
// alternate runs, as the ladder does.  Exactly 20 operations are issued
// per call.
module tb_xdbladd;
  `include "fe_env.svh"
  logic start = 0, done;
  raddr_t px, pz, qx, qz;
  fe_cmd_t xcmd;
  xdbladd dut (.clk, .rst_n, .start, .px, .pz, .qx, .qz, .done, .cmd(xcmd), .rsp);
  assign cmd = xcmd;

  initial begin
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nops = 0;
  always @(posedge clk) if (cmd.valid) nops++;

  longint curves [3] = '{0, 265791, 90879};
  pt_t b, p, q, got2, gotA;
  longint a, m;
  int n0;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 30; i++) begin
      a = curves[i % 3];
      b.x = rndm(); b.z = 1;
      m = longint'($urandom_range(1, 200));
      p = xmul_ref(b, m + 1, a);
      q = xmul_ref(b, m, a);
      set_curve(a);
      setr(R_LDX, b.x); setr(R_LDZ, b.z);
      if (i % 2 == 0) begin px = R_L0X; pz = R_L0Z; qx = R_L1X; qz = R_L1Z; end
      else begin px = R_L1X; pz = R_L1Z; qx = R_L0X; qz = R_L0Z; end
      setr(px, p.x); setr(pz, p.z); setr(qx, q.x); setr(qz, q.z);
      @(negedge clk);
      start = 1; n0 = nops;
      @(negedge clk) start = 0;
      while (!done) begin @(posedge clk); #1; end
      got2.x = getr(px); got2.z = getr(pz);
      gotA.x = getr(qx); gotA.z = getr(qz);
      check("doubling", same(got2, xmul_ref(b, 2 * m + 2, a)));
      check("differential addition", same(gotA, xmul_ref(b, 2 * m + 1, a)));
      check("20 operations", nops - n0 == 20);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
