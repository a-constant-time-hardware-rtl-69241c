// tb_xprng: checks the PRNG against an independent model of the 32-bit
// xorshift sequence (13, 17, 5) word by word, checks that reseeding restarts
// the sequence from the new seed, and that the NW words are not equal.
module tb_xprng;
  localparam int NW = 4, W = 32 * NW;
  logic clk = 0, rst_n = 0, load = 0;
  logic [63:0] seed = '0;
  logic [W-1:0] rnd;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  xprng #(.NW(NW)) dut (.*);

  function automatic logic [31:0] step(input logic [31:0] x);
    x ^= x << 13; x ^= x >> 17; x ^= x << 5;
    return x;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic follow(input int n);
    logic [W-1:0] prev;
    for (int k = 0; k < n; k++) begin
      prev = rnd;
      @(posedge clk); #1;
      for (int i = 0; i < NW; i++) begin
        checks++;
        if (rnd[32*i +: 32] !== step(prev[32*i +: 32])) begin
          failures++; $display("word %0d wrong", i);
        end
      end
    end
  endtask

  initial begin
    logic [W-1:0] prev_rnd;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    follow(200);
    for (int i = 1; i < NW; i++) begin
      checks++;
      if (rnd[31:0] == rnd[32*i +: 32]) begin failures++; $display("words equal"); end
    end
    prev_rnd = rnd;
    @(negedge clk) begin load = 1; seed = 64'h0123_4567_89ab_cdef; end
    @(negedge clk) load = 0;
    checks++;
    if (rnd == step(prev_rnd)) begin failures++; $display("seed load ignored"); end
    follow(100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
