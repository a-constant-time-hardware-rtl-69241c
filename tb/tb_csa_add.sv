// tb_csa_add: random and corner-case check of the 512-bit carry-select adder.
// Compares {cout, sum} with a 513-bit reference sum two clocks after each input,
// feeding one operand pair per clock, and checks the two-cycle latency.
module tb_csa_add;
  localparam int NCH = 16, W = 32 * NCH;
  logic clk = 0, rst_n = 0, in_valid = 0, flush = 0, cin = 0;
  logic [W-1:0] a = '0, b = '0, sum;
  logic out_valid, cout;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  csa_add #(.NCH(NCH)) dut (.*);

  logic [W:0] exp_q [$];
  function automatic logic [W-1:0] rndw();
    logic [W-1:0] v;
    for (int i = 0; i < W/32; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      case (n % 4)
        0: begin a = rndw(); b = rndw(); end
        1: begin a = '1; b = (n % 8 == 1) ? W'(1) : '0; end       // full carry ripple
        2: begin a = {W/32{32'hffff_ffff}}; b = rndw(); end
        default: begin a = rndw(); b = ~a; end                    // all-ones sum
      endcase
      cin = 1'($urandom % 2);
      in_valid = 1;
      exp_q.push_back({1'b0, a} + {1'b0, b} + (W+1)'(cin));
    end
    @(negedge clk) in_valid = 0;
    repeat (4) @(posedge clk);
    if (exp_q.size() != 0) begin failures++; $display("missing outputs: %0d", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int lat = 0;
  always @(posedge clk) begin
    if (out_valid) begin
      logic [W:0] e;
      e = exp_q.pop_front();
      checks++;
      if ({cout, sum} !== e) begin
        failures++;
        $display("mismatch got %h exp %h", {cout, sum}, e);
      end
    end
  end

  // latency: first out_valid exactly two clocks after first in_valid
  initial begin
    @(posedge in_valid);
    @(posedge clk); @(posedge clk);
    #1;
    checks++;
    if (!out_valid) begin failures++; $display("latency is not 2 cycles"); end
  end
endmodule
