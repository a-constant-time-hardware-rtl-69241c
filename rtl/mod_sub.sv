// mod_sub: pipelined modular subtractor, diff = (a - b) mod p for a, b < p.
//
// A csa_sub forms d = a - b and its borrow; a csa_add then forms d + p.  When
// the subtraction borrowed the corrected value d + p (mod 2^W) is the result,
// otherwise d.  d and the borrow are delayed two cycles to meet the sum.
//
// Interface: a, b and in_valid are taken every clock; diff and out_valid
// follow four clocks later, one subtraction per clock.  Only valid tags reset.
//
// The paper gives the function (512-bit modular subtraction) and the chunked
// borrow-select core; the add-back of p is this design's choice.
module mod_sub #(
  parameter int NW = csidh_pkg::NW512,
  localparam int W = 32 * NW,
  parameter logic [W-1:0] P = csidh_pkg::P512
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic         out_valid,
  output logic [W-1:0] diff
);
  logic         v1;
  logic [W-1:0] d1;
  logic         bo1;
  csa_sub #(.NCH(NW)) u_sub (
    .clk, .rst_n, .in_valid, .a, .b, .bin(1'b0),
    .out_valid(v1), .diff(d1), .bout(bo1)
  );

  logic [W-1:0] s2;
  logic         c2_unused;
  csa_add #(.NCH(NW)) u_fix (
    .clk, .rst_n, .flush(1'b0), .in_valid(v1), .a(d1), .b(P), .cin(1'b0),
    .out_valid(out_valid), .sum(s2), .cout(c2_unused)
  );

  logic [W-1:0] d1_d [2];
  logic         bo1_d [2];
  always_ff @(posedge clk) begin
    d1_d[0]  <= d1;   d1_d[1]  <= d1_d[0];
    bo1_d[0] <= bo1;  bo1_d[1] <= bo1_d[0];
  end

  assign diff = bo1_d[1] ? s2 : d1_d[1];
endmodule
