// tb_mul512: checks the parallel schoolbook multiplier, in its DSP version
// (MUL_CYC = 1) and its Booth version (MUL_CYC = 2) side by side, against the
// full 1024-bit product of random and extreme operands.  It checks the latency
// from start to done (22 and 23 clocks for 512-bit operands) and that a start
// issued while a product is in flight aborts it cleanly.
module tb_mul512;
  localparam int NW = 16, W = 32 * NW;
  logic clk = 0, rst_n = 0, start = 0;
  logic [W-1:0] a = '0, b = '0;
  logic [2*W-1:0] p1, p2;
  logic busy1, busy2, done1, done2;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  mul512 #(.NW(NW), .MUL_CYC(1)) dut1 (.clk, .rst_n, .start, .a, .b, .busy(busy1), .done(done1), .p(p1));
  mul512 #(.NW(NW), .MUL_CYC(2)) dut2 (.clk, .rst_n, .start, .a, .b, .busy(busy2), .done(done2), .p(p2));

  function automatic logic [W-1:0] rndw();
    logic [W-1:0] v;
    for (int i = 0; i < W/32; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic run(input logic [W-1:0] x, input logic [W-1:0] y, input bit abort);
    int t0, l1, l2;
    logic [2*W-1:0] e;
    @(negedge clk);
    if (abort) begin
      a = rndw(); b = rndw(); start = 1;
      @(negedge clk) start = 0;
      repeat (5 + $urandom % 10) @(negedge clk);
    end
    a = x; b = y; start = 1; t0 = cyc;
    e = {{W{1'b0}}, x} * {{W{1'b0}}, y};
    @(negedge clk) start = 0;
    l1 = -1; l2 = -1;
    while (l1 < 0 || l2 < 0) begin
      @(posedge clk); #1;
      if (done1 && l1 < 0) begin
        l1 = cyc - t0;
        checks++;
        if (p1 !== e) begin failures++; $display("DSP mismatch"); end
      end
      if (done2 && l2 < 0) begin
        l2 = cyc - t0;
        checks++;
        if (p2 !== e) begin failures++; $display("Booth mismatch"); end
      end
    end
    checks += 2;
    if (l1 != 22) begin failures++; $display("DSP latency %0d", l1); end
    if (l2 != 23) begin failures++; $display("Booth latency %0d", l2); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run('1, '1, 0);
    run('0, rndw(), 0);
    run(W'(1), rndw(), 0);
    for (int n = 0; n < 30; n++) run(rndw(), rndw(), n % 3 == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
