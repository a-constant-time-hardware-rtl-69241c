// tb_booth_mul32: checks the two-cycle radix-4 Booth multiplier against the
// 64-bit product of random and corner operands (0, 1, all ones, single bits,
// alternating patterns), one product per clock, and checks the two-clock
// latency.
module tb_booth_mul32;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [31:0] a = '0, b = '0;
  logic [63:0] p;
  logic out_valid;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  booth_mul32 dut (.*);

  logic [63:0] exp_q [$];
  int cyc = 0, issue_cyc = 0, first_out = -1;
  always @(posedge clk) cyc++;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [31:0] pick(int n);
    case (n % 6)
      0: return 32'hffff_ffff;
      1: return 32'h0;
      2: return 32'h1 << ($urandom % 32);
      3: return 32'haaaa_aaaa ^ ($urandom % 2 ? 32'hffff_ffff : 32'h0);
      default: return $urandom;
    endcase
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      a = (n < 36) ? pick(n / 6) : $urandom;
      b = (n < 36) ? pick(n) : $urandom;
      in_valid = 1;
      if (n == 0) issue_cyc = cyc;
      exp_q.push_back({32'b0, a} * {32'b0, b});
    end
    @(negedge clk) in_valid = 0;
    repeat (4) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("missing outputs"); end
    checks++;
    // applied after edge issue_cyc, sampled on the next edge, product two edges later
    if (first_out - issue_cyc != 3) begin failures++; $display("latency %0d", first_out - issue_cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk)
    if (out_valid && exp_q.size() > 0) begin
      logic [63:0] e;
      if (first_out < 0) first_out = cyc;
      e = exp_q.pop_front();
      checks++;
      if (p !== e) begin failures++; $display("mismatch got %h exp %h", p, e); end
    end
endmodule
