// booth_mul32: two-cycle radix-4 Booth multiplier, p = a * b (32x32 -> 64, unsigned).
//
// Both operands are widened with a 0 MSB so that the signed Booth recoding of
// the 33-bit multiplier b yields 17 partial products, each 0, +-a or +-2a shifted
// by 2i, and the product of the two positive 33-bit numbers is the unsigned
// 64-bit product.  Stage 1 recodes b, sums partial products 0..8 in one adder
// tree and registers that sum together with partial products 9..16.  Stage 2
// adds the registered sum and the eight remaining partial products.
//
// Interface: a, b, in_valid sampled every clock; p and out_valid two clocks
// later, one product per clock.  Only the valid tags are reset.
//
// Radix-4 Booth, the 0-padding to 33 bits, 17 partial products and the 9 / 8
// split across the two stages are the paper's (ASIC 32x32 multiplier).  The
// adder trees are written as plain sums and left to synthesis.
module booth_mul32 (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic        out_valid,
  output logic [63:0] p
);
  localparam int NPP = 17;
  localparam int PW  = 68;     // wide enough for any shifted partial product

  function automatic logic [PW-1:0] booth_pp(input logic [31:0] m, input logic [2:0] g, input int i);
    logic [PW-1:0] am;
    am = {{(PW-32){1'b0}}, m};
    unique case (g)
      3'b001, 3'b010: booth_pp = am << (2*i);
      3'b011:         booth_pp = am << (2*i + 1);
      3'b100:         booth_pp = (~(am << (2*i + 1))) + 1'b1;
      3'b101, 3'b110: booth_pp = (~(am << (2*i))) + 1'b1;
      default:        booth_pp = '0;
    endcase
  endfunction

  logic [34:0] bx;          // {0, 0, b, 0}: b zero-extended, with the implicit b[-1] = 0
  assign bx = {2'b00, b, 1'b0};

  logic [PW-1:0] pp [NPP];
  always_comb
    for (int i = 0; i < NPP; i++) pp[i] = booth_pp(a, bx[2*i +: 3], i);

  logic [PW-1:0] lo_sum;
  always_comb begin
    lo_sum = '0;
    for (int i = 0; i < 9; i++) lo_sum = lo_sum + pp[i];
  end

  logic [PW-1:0] s1_q;
  logic [PW-1:0] hi_q [8];
  logic          v1_q;
  always_ff @(posedge clk) begin
    s1_q <= lo_sum;
    for (int i = 0; i < 8; i++) hi_q[i] <= pp[9+i];
  end

  logic [PW-1:0] total;
  always_comb begin
    total = s1_q;
    for (int i = 0; i < 8; i++) total = total + hi_q[i];
  end

  always_ff @(posedge clk) p <= total[63:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_q <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1_q <= in_valid;
      out_valid <= v1_q;
    end
  end
endmodule
