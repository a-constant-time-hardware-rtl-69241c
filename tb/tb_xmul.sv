// tb_xmul: checks the x-only Montgomery ladder on the toy-size datapath
// (fe_env.svh).  For random curves given by a supersingular coefficient A and
// random points it compares [k]P in R_MX / R_MZ with the reference ladder,
// projectively, for scalars 1, 2, 4 and the odd primes 3..17 plus random
// 10-bit values.  It also checks that the point at infinity stays there and
// that the run time is 8 copies plus one xdbladd (20 operations) per bit of k,
// i.e. it depends on the bit length of k only.
module tb_xmul;
  `include "fe_env.svh"
  logic start = 0, done;
  logic [LBITS-1:0] k;
  fe_cmd_t xcmd;
  xmul dut (.clk, .rst_n, .start, .k, .done, .cmd(xcmd), .rsp);
  assign cmd = xcmd;

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nops = 0;
  always @(posedge clk) if (cmd.valid) nops++;

  task automatic run(input longint kk, input longint a, input pt_t p);
    pt_t got, exp;
    int n0, nbits;
    set_curve(a);
    setr(R_MX, p.x); setr(R_MZ, p.z);
    @(negedge clk);
    k = LBITS'(kk); start = 1; n0 = nops;
    @(negedge clk) start = 0;
    while (!done) begin @(posedge clk); #1; end
    got.x = getr(R_MX); got.z = getr(R_MZ);
    exp = xmul_ref(p, kk, a);
    nbits = $clog2(kk + 1);
    if (exp.z == 0) check($sformatf("[%0d]P = O", kk), got.z == 0);
    else check($sformatf("[%0d]P", kk), got.z != 0 && same(got, exp));
    check("operation count", nops - n0 == 8 + 20 * nbits);
  endtask

  longint curves [3] = '{0, 265791, 90879};
  longint ks [9] = '{1, 2, 4, 3, 5, 7, 11, 13, 17};
  pt_t p;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3; c++)
      for (int i = 0; i < 9; i++) begin
        p.x = rndm(); p.z = 1;
        run(ks[i], curves[c], p);
      end
    for (int i = 0; i < 10; i++) begin
      p.x = rndm(); p.z = rndm() | 1;
      run(longint'($urandom_range(1, 1023)), curves[i % 3], p);
    end
    p.x = 1; p.z = 0;
    run(13, 0, p);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
