// tb_mod_add: checks the 512-bit modular adder against (a + b) mod p computed
// with wide arithmetic, one operand pair per clock, including a + b = p,
// a + b = p - 1 and a + b = 2p - 2, and checks the four-clock latency.
module tb_mod_add;
  import csidh_pkg::*;
  localparam int NW = 16, W = 32 * NW;
  localparam logic [W-1:0] P = P512;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [W-1:0] a = '0, b = '0, sum;
  logic out_valid;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  mod_add #(.NW(NW), .P(P)) dut (.*);

  logic [W-1:0] exp_q [$];
  function automatic logic [W-1:0] rndp();
    logic [W:0] v;
    for (int i = 0; i < W/32; i++) v[32*i +: 32] = $urandom;
    v[W] = 1'b0;
    return W'(v % {1'b0, P});
  endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int issue_cyc, first_out = -1, cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      a = rndp();
      case (n % 5)
        1: b = P - a;                       // sum is exactly p -> 0
        2: b = (a == '0) ? '0 : P - a - 1;  // sum is p - 1
        3: begin a = P - 1; b = P - 1; end  // largest sum
        4: b = '0;
        default: b = rndp();
      endcase
      in_valid = 1;
      if (n == 0) issue_cyc = cyc;
      exp_q.push_back(W'(({1'b0, a} + {1'b0, b}) % {1'b0, P}));
    end
    @(negedge clk) in_valid = 0;
    repeat (6) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("missing outputs"); end
    checks++;
    // input applied after edge issue_cyc, sampled on the next edge, result four edges later
    if (first_out - issue_cyc != 5) begin failures++; $display("latency %0d", first_out - issue_cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk)
    if (out_valid && exp_q.size() > 0) begin
      logic [W-1:0] e;
      if (first_out < 0) first_out = cyc;
      e = exp_q.pop_front();
      checks++;
      if (sum !== e) begin failures++; $display("mismatch got %h exp %h", sum, e); end
    end
endmodule
