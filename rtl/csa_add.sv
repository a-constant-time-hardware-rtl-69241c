// csa_add: two-stage pipelined carry-select adder.
//
// The operands are cut into NCH chunks of 32 bits.  In the first stage every
// chunk computes two sums in parallel, one for a carry-in of 0 and one for a
// carry-in of 1, and both are registered together with their carry-outs.  In the
// second stage the real carry ripples through a chain of 2:1 multiplexers that
// pick, chunk by chunk, the precomputed sum and carry-out; the result is
// registered.  The longest combinational path is therefore one 32-bit adder
// (stage 1) or the multiplexer chain (stage 2).
//
// Interface: a, b, cin and the tag in_valid are sampled every clock; sum, cout
// and out_valid appear two clocks later; flush drops the tags still in flight.  The data registers update every cycle
// whether or not in_valid is set, so the adder switches on every clock (the ALU
// relies on this for masking).  No reset on the data path; out_valid is reset.
//
// The chunking, the two scenarios per chunk and the two-stage split follow the
// paper (carry-select adder, Algorithm 2 and Fig. 2).  The carry-in port, the
// generic chunk count and the valid tag are this design's additions.
module csa_add #(
  parameter int NCH = 16,
  localparam int W  = 32 * NCH
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         flush,      // clears the valid tags in flight
  input  logic         in_valid,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  output logic         out_valid,
  output logic [W-1:0] sum,
  output logic         cout
);
  // stage 1: both scenarios per chunk
  logic [32:0] s0_q [NCH];
  logic [32:0] s1_q [NCH];
  logic        cin_q, v1_q;

  always_ff @(posedge clk) begin
    for (int i = 0; i < NCH; i++) begin
      s0_q[i] <= {1'b0, a[32*i +: 32]} + {1'b0, b[32*i +: 32]};
      s1_q[i] <= {1'b0, a[32*i +: 32]} + {1'b0, b[32*i +: 32]} + 33'd1;
    end
    cin_q <= cin;
  end

  // stage 2: carry propagation and selection
  logic [W-1:0] sel_sum;
  logic [NCH:0] c;
  always_comb begin
    c[0] = cin_q;
    for (int i = 0; i < NCH; i++) begin
      sel_sum[32*i +: 32] = c[i] ? s1_q[i][31:0] : s0_q[i][31:0];
      c[i+1]              = c[i] ? s1_q[i][32]   : s0_q[i][32];
    end
  end

  always_ff @(posedge clk) begin
    sum  <= sel_sum;
    cout <= c[NCH];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_q      <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1_q      <= in_valid && !flush;
      out_valid <= v1_q && !flush;
    end
  end
endmodule
