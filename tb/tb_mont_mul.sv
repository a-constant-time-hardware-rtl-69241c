// tb_mont_mul: checks the Montgomery multiplier at 512 bits.  For random
// a, b < p it checks r < p and r * 2^512 = a * b (mod p) with wide arithmetic,
// plus the cases a = 0, a = p - 1, b = p - 1 and a = R mod p (Montgomery one,
// r must equal b).  It also checks the fixed latency and that a restart during
// a product aborts it.
module tb_mont_mul;
  import csidh_pkg::*;
  localparam int NW = 16, W = 32 * NW;
  localparam logic [W-1:0] P = P512;
  localparam int EXP_LAT = 71;
  logic clk = 0, rst_n = 0, start = 0;
  logic [W-1:0] a = '0, b = '0, r;
  logic busy, done;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  mont_mul #(.NW(NW), .MUL_CYC(1), .P(P), .PINV(PINV512)) dut (.*);

  function automatic logic [W-1:0] rndp();
    logic [W:0] v;
    for (int i = 0; i < W/32; i++) v[32*i +: 32] = $urandom;
    v[W] = 1'b0;
    return W'(v % {1'b0, P});
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic run(input logic [W-1:0] x, input logic [W-1:0] y, input bit abort);
    int t0;
    logic [2*W+1:0] lhs, rhs;
    @(negedge clk);
    if (abort) begin
      a = rndp(); b = rndp(); start = 1;
      @(negedge clk) start = 0;
      repeat (10 + $urandom % 50) @(negedge clk);
    end
    a = x; b = y; start = 1; t0 = cyc;
    @(negedge clk) start = 0;
    do begin @(posedge clk); #1; end while (!done);
    checks += 3;
    lhs = ({{(W+2){1'b0}}, r} << W) % {{(W+2){1'b0}}, P};
    rhs = ({{(W+2){1'b0}}, x} * {{(W+2){1'b0}}, y}) % {{(W+2){1'b0}}, P};
    if (lhs !== rhs) begin failures++; $display("wrong product"); end
    if (r >= P) begin failures++; $display("not reduced"); end
    if (cyc - t0 != EXP_LAT) begin failures++; $display("latency %0d", cyc - t0); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run('0, rndp(), 0);
    run(P - 1, P - 1, 0);
    run(rndp(), P - 1, 0);
    begin
      logic [W-1:0] y;
      y = rndp();
      run(ONE512, y, 0);
      checks++;
      if (r !== y) begin failures++; $display("one * b != b"); end
    end
    for (int n = 0; n < 20; n++) run(rndp(), rndp(), n % 4 == 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
