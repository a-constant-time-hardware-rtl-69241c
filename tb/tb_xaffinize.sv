// tb_xaffinize: checks the projective-to-affine conversion on the toy-size
// datapath (fe_env.svh): R_AFX = X / Z for random X, Z compared with X * Z^-1
// computed in the bench, Z = 0 giving 0, and the operation count, which must
// be the same for every input (it depends on p only).
module tb_xaffinize;
  `include "fe_env.svh"
  logic start = 0, done;
  fe_cmd_t xcmd;
  xaffinize #(.NW(NW), .P(P)) dut (.clk, .rst_n, .start, .done, .cmd(xcmd), .rsp);
  assign cmd = xcmd;

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nops = 0, ops0 = -1;
  always @(posedge clk) if (cmd.valid) nops++;

  task automatic run(input longint x, input longint z);
    int n0;
    setr(R_AFX, x); setr(R_AFZ, z);
    @(negedge clk);
    start = 1; n0 = nops;
    @(negedge clk) start = 0;
    while (!done) begin @(posedge clk); #1; end
    check($sformatf("%0d / %0d", x, z), getr(R_AFX) == ((z == 0) ? 0 : mulm(x, invm(z))));
    if (ops0 < 0) ops0 = nops - n0;
    check("operation count constant", nops - n0 == ops0);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20; i++) run(rndm(), rndm() | 1);
    run(5, 1);
    run(7, PL - 1);
    run(9, 0);
    // 19 squarings for the 20-bit p, one multiply per further set bit of p-2,
    // one copy and one final multiply
    check("operation count", ops0 == 19 + ($countones(PL - 2) - 1) + 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
