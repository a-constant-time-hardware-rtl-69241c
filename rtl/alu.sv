// alu: masked field ALU of the CSIDH accelerator (modular add, sub, Montgomery mul).
//
// Three units sit side by side: mod_add, mod_sub and mont_mul.  To hide which
// operation runs, every unit works on every clock.  The unit that serves the
// issued command receives the real operands; the others receive words from the
// random input rnd, and their results are thrown away.  The adder and the
// subtractor are free-running pipelines fed every clock; the Montgomery
// multiplier, whenever it is idle, starts a dummy product on random operands,
// and a real MUL command aborts the dummy product and restarts the unit.  With
// MASK = 0 the idle units get zero operands and the multiplier stays idle.
//
// Interface: start (one clock) with op, a, b issues a command; done pulses with
// result and zero (result == 0, the "State" line back to the control unit).
// Only one command may be in flight; a new one may be issued in the done
// clock.  Latency from start to done: 5 clocks for ADD and SUB, the mont_mul
// latency plus one for MUL (72 at the defaults).
//
// The three operators, their being fed random operands when idle, and the
// OP / A / B / result / State connections of Fig. 1 follow the paper.  Taking
// the random words from an input port (driven by the PRNG) and aborting dummy
// products are this design's choices.
module alu #(
  parameter int NW      = csidh_pkg::NW512,
  parameter int MUL_CYC = 1,
  parameter bit MASK    = 1'b1,
  localparam int W      = 32 * NW,
  parameter logic [W-1:0] P    = csidh_pkg::P512,
  parameter logic [W-1:0] PINV = csidh_pkg::PINV512
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  csidh_pkg::alu_op_e  op,
  input  logic [W-1:0]        a,
  input  logic [W-1:0]        b,
  input  logic [W-1:0]        rnd,
  output logic                done,
  output logic [W-1:0]        result,
  output logic                zero
);
  import csidh_pkg::*;

  // random operands for the units that are not used (reduced below p by
  // clearing the top two bits, which keeps them valid field inputs as p > R/4)
  logic [W-1:0] r0, r1;
  assign r0 = MASK ? {2'b00, rnd[W-3:0]} : '0;
  assign r1 = MASK ? {2'b00, rnd[W-2:1] ^ {rnd[W-W/2-1:0], rnd[W-1:W-W/2+2]}} : '0;

  logic is_add, is_sub, is_mul;
  assign is_add = start && op == ALU_ADD;
  assign is_sub = start && op == ALU_SUB;
  assign is_mul = start && op == ALU_MUL;

  // ---- adder -------------------------------------------------------------
  logic         add_v;
  logic [W-1:0] add_r;
  mod_add #(.NW(NW), .P(P)) u_add (
    .clk, .rst_n, .in_valid(is_add),
    .a(is_add ? a : r0), .b(is_add ? b : r1),
    .out_valid(add_v), .sum(add_r)
  );

  // ---- subtractor ----------------------------------------------------------
  logic         sub_v;
  logic [W-1:0] sub_r;
  mod_sub #(.NW(NW), .P(P)) u_sub (
    .clk, .rst_n, .in_valid(is_sub),
    .a(is_sub ? a : r1), .b(is_sub ? b : r0),
    .out_valid(sub_v), .diff(sub_r)
  );

  // ---- Montgomery multiplier ----------------------------------------------
  logic         mm_busy, mm_done, mm_real;
  logic [W-1:0] mm_r;
  logic         mm_start, mm_done_q;
  assign mm_start = is_mul || (MASK && !mm_busy && !mm_done_q);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) mm_done_q <= 1'b0;
    else mm_done_q <= mm_done;

  mont_mul #(.NW(NW), .MUL_CYC(MUL_CYC), .P(P), .PINV(PINV)) u_mul (
    .clk, .rst_n, .start(mm_start),
    .a(is_mul ? a : r0), .b(is_mul ? b : r1),
    .busy(mm_busy), .done(mm_done), .r(mm_r)
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) mm_real <= 1'b0;
    else if (is_mul) mm_real <= 1'b1;
    else if (mm_done) mm_real <= 1'b0;

  // ---- result ------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done <= 1'b0;
    end else begin
      done <= add_v || sub_v || (mm_done && mm_real);
    end
  end

  always_ff @(posedge clk) begin
    if (add_v) begin
      result <= add_r;
      zero   <= (add_r == '0);
    end else if (sub_v) begin
      result <= sub_r;
      zero   <= (sub_r == '0);
    end else if (mm_done && mm_real) begin
      result <= mm_r;
      zero   <= (mm_r == '0);
    end
  end

  // one command at a time
  logic busy_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) busy_q <= 1'b0;
    else begin
      if (start) busy_q <= 1'b1;
      else if (done) busy_q <= 1'b0;
      a_one_cmd: assert (!start || !busy_q || done)
        else $error("alu: command issued while another is in flight");
    end
endmodule
