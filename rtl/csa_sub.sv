// csa_sub: two-stage pipelined borrow-select subtractor, diff = a - b - bin.
//
// Same organisation as csa_add with the carry replaced by a borrow.  Stage 1
// computes, for every 32-bit chunk, the difference for a borrow-in of 0 and of
// 1 together with the two borrow-outs, and registers them.  Stage 2 ripples the
// real borrow through a multiplexer chain that selects each chunk's difference
// and borrow-out, and registers the result.
//
// Interface: a, b, bin and in_valid are sampled every clock; diff, bout (1 when
// a < b + bin) and out_valid appear two clocks later.  Data registers update
// every cycle; only out_valid is reset.
//
// The chunked borrow-select scheme follows the paper's subtractor description;
// the borrow-in port, generic chunk count and valid tag are this design's own.
module csa_sub #(
  parameter int NCH = 16,
  localparam int W  = 32 * NCH
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         bin,
  output logic         out_valid,
  output logic [W-1:0] diff,
  output logic         bout
);
  logic [32:0] d0_q [NCH];   // {borrow, diff} for borrow-in 0
  logic [32:0] d1_q [NCH];   // {borrow, diff} for borrow-in 1
  logic        bin_q, v1_q;

  always_ff @(posedge clk) begin
    for (int i = 0; i < NCH; i++) begin
      d0_q[i] <= {1'b0, a[32*i +: 32]} - {1'b0, b[32*i +: 32]};
      d1_q[i] <= {1'b0, a[32*i +: 32]} - {1'b0, b[32*i +: 32]} - 33'd1;
    end
    bin_q <= bin;
  end

  logic [W-1:0] sel_diff;
  logic [NCH:0] bw;
  always_comb begin
    bw[0] = bin_q;
    for (int i = 0; i < NCH; i++) begin
      sel_diff[32*i +: 32] = bw[i] ? d1_q[i][31:0] : d0_q[i][31:0];
      bw[i+1]              = bw[i] ? d1_q[i][32]   : d0_q[i][32];
    end
  end

  always_ff @(posedge clk) begin
    diff <= sel_diff;
    bout <= bw[NCH];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_q      <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1_q      <= in_valid;
      out_valid <= v1_q;
    end
  end
endmodule
