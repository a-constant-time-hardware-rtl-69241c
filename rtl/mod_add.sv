// mod_add: pipelined modular adder, sum = (a + b) mod p for a, b < p.
//
// Two carry-select stages back to back.  The first csa_add forms s = a + b
// (W+1 bits); the second, a csa_sub, forms s - p.  If the addition carried out
// or the subtraction did not borrow, s >= p and the difference is the result,
// otherwise s itself.  s is delayed two cycles to meet the difference.
//
// Interface: a, b and in_valid are taken every clock; sum and out_valid follow
// four clocks later (fully pipelined, one addition per clock).  Data registers
// are free-running; only the valid tags are reset.
//
// The paper gives the adder's function (512-bit modular addition on 32-bit
// words) and the carry-select core; the final conditional subtraction of p is
// this design's choice of how to reduce.
module mod_add #(
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
  output logic [W-1:0] sum
);
  logic         v1;
  logic [W-1:0] s1;
  logic         c1;
  csa_add #(.NCH(NW)) u_add (
    .clk, .rst_n, .flush(1'b0), .in_valid, .a, .b, .cin(1'b0),
    .out_valid(v1), .sum(s1), .cout(c1)
  );

  logic [W-1:0] d2;
  logic         bo2;
  csa_sub #(.NCH(NW)) u_red (
    .clk, .rst_n, .in_valid(v1), .a(s1), .b(P), .bin(1'b0),
    .out_valid(out_valid), .diff(d2), .bout(bo2)
  );

  logic [W-1:0] s1_d [2];
  logic         c1_d [2];
  always_ff @(posedge clk) begin
    s1_d[0] <= s1;  s1_d[1] <= s1_d[0];
    c1_d[0] <= c1;  c1_d[1] <= c1_d[0];
  end

  assign sum = (c1_d[1] || !bo2) ? d2 : s1_d[1];
endmodule
