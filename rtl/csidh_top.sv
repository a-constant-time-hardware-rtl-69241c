// csidh_top: the CSIDH co-processor of Fig. 1 - control unit (csidh_ctrl with
// its sub-FSMs, plus the register file cu_regfile), the masked modular ALU and
// the PRNG.
//
// Operation: hold a_in (a plain Montgomery coefficient A < p; 0 for the
// starting curve), private_key (one signed exponent per prime, |e_i| <= EMAX)
// and seed, pulse start for one clock.  busy goes high; when done pulses,
// a_out holds the resulting coefficient A' in plain form and success tells
// whether it is valid.  success = 0 covers a rejected input (A >= p or
// A = +-2), a failed [p+1]P validation or a fault found by an isogeny's [l]K
// check (fault = 1); a_out is then a random field element.  The PRNG is
// re-seeded at each start, so a given seed gives a repeatable run.
//
// Timing: the run time depends only on EMAX, the prime list, BATCH and the
// random points drawn (kernel points at infinity and point retries), never on
// the values of the key, since every prime gets EMAX isogenies.
//
// From the paper: block structure (control unit with register file, ALU with
// adder, subtractor and multiplier, PRNG), the CSIDH-512 parameters, masking.
// Own choices: port list, seeding, the number of registers (NREG) and the
// behaviour on failure.
module csidh_top #(
  parameter int NW       = csidh_pkg::NW512,
  localparam int W       = 32 * NW,
  parameter logic [W-1:0] P    = csidh_pkg::P512,
  parameter logic [W-1:0] PINV = csidh_pkg::PINV512,
  parameter logic [W-1:0] R2   = csidh_pkg::R2_512,
  parameter logic [W-1:0] MONE = csidh_pkg::ONE512,
  parameter int NPRIMES  = csidh_pkg::NPRIMES512,
  parameter int LBITS    = csidh_pkg::LBITS,
  parameter logic [LBITS-1:0] PRIMES [NPRIMES] = csidh_pkg::PRIMES512,
  parameter int EMAX     = 5,
  parameter int BATCH    = 16,
  parameter int MUL_CYC  = 1,
  parameter bit MASK     = 1'b1,
  parameter bit VALIDATE = 1'b1,
  parameter bit FAULT_CHECK = 1'b1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [W-1:0]       a_in,
  input  logic signed [3:0]  private_key [NPRIMES],
  input  logic [63:0]        seed,
  output logic [W-1:0]       a_out,
  output logic               busy,
  output logic               done,
  output logic               success,
  output logic               fault
);
  import csidh_pkg::*;

  logic         prng_load;
  logic [W-1:0] rnd;
  xprng #(.NW(NW)) u_prng (.clk, .rst_n, .load(prng_load), .seed, .rnd);

  fe_cmd_t  cmd;
  fe_rsp_t  rsp;
  logic     alu_start, alu_done, alu_zero;
  alu_op_e  alu_op;
  logic [W-1:0] alu_a, alu_b, alu_result;

  csidh_ctrl #(
    .NW(NW), .P(P), .NPRIMES(NPRIMES), .LBITS(LBITS), .PRIMES(PRIMES), .EMAX(EMAX),
    .BATCH(BATCH), .VALIDATE(VALIDATE), .FAULT_CHECK(FAULT_CHECK)
  ) u_ctrl (
    .clk, .rst_n, .start, .a_in, .private_key, .busy, .done, .success, .fault,
    .prng_load, .cmd, .rsp
  );

  cu_regfile #(.NW(NW), .R2(R2), .MONE(MONE)) u_rf (
    .clk, .rst_n, .cmd, .rsp, .ext_in(a_in), .rnd,
    .alu_start, .alu_op, .alu_a, .alu_b, .alu_done, .alu_result, .alu_zero,
    .out_value(a_out)
  );

  alu #(.NW(NW), .MUL_CYC(MUL_CYC), .MASK(MASK), .P(P), .PINV(PINV)) u_alu (
    .clk, .rst_n, .start(alu_start), .op(alu_op), .a(alu_a), .b(alu_b), .rnd,
    .done(alu_done), .result(alu_result), .zero(alu_zero)
  );
endmodule
