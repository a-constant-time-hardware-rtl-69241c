// xprng: pseudo-random word source of the CSIDH accelerator.
//
// NW independent 32-bit xorshift generators (x ^= x<<13; x ^= x>>17;
// x ^= x<<5) run side by side and together give a fresh W-bit word every
// clock.  The words feed the ALU's masking operands and, through the FE_RND
// command, the random x-coordinates of new torsion points.  Each generator is
// seeded from SEED, the 64-bit seed input and its own index; load (one clock)
// reseeds all of them.  The generator is not cryptographically strong: it only
// has to decorrelate dummy switching and pick points, and the group-action
// result does not depend on which points it picks.
//
// Interface: load + seed reseed; rnd changes every clock.
//
// The paper only names the PRNG as one of the control-unit modules; the
// xorshift construction is this design's choice.
module xprng #(
  parameter int NW = csidh_pkg::NW512,
  localparam int W = 32 * NW,
  parameter logic [31:0] SEED = 32'h2545_f491
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [63:0]  seed,
  output logic [W-1:0] rnd
);
  function automatic logic [31:0] xs32(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  function automatic logic [31:0] seed_of(input int i, input logic [63:0] s);
    logic [31:0] v;
    v = SEED ^ (32'h9e37_79b9 * 32'(i + 1)) ^ s[31:0] ^ {s[62:32], s[63]};
    return (v == 32'd0) ? 32'h1 : v;   // xorshift must not start at zero
  endfunction

  logic [31:0] st [NW];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NW; i++) st[i] <= seed_of(i, 64'd0);
    end else if (load) begin
      for (int i = 0; i < NW; i++) st[i] <= seed_of(i, seed);
    end else begin
      for (int i = 0; i < NW; i++) st[i] <= xs32(st[i]);
    end
  end

  always_comb
    for (int i = 0; i < NW; i++) rnd[32*i +: 32] = st[i];
endmodule
