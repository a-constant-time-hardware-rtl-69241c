// cu_regfile: operand register file and command executor of the control unit.
//
// All field elements the control FSMs work on live here: NREG words of W bits,
// of which addresses 0..3 are read-only constants (0, R mod p, R^2 mod p and
// plain 1).  The FSMs do not touch the data; they send commands
// {op, dst, a, b} (csidh_pkg::fe_cmd_t).  For ADD, SUB and MUL this block reads
// the two source registers, drives them with the operation onto the ALU's
// OP / A / B inputs and, when the ALU reports done, writes the result to dst
// and answers with rsp.done and the ALU's zero flag.  FE_RND writes a PRNG word
// and FE_LDIN the external input word; they answer one clock later.
//
// Interface: cmd.valid for one clock starts a command; rsp.done pulses for one
// clock when its result is written (the next command may be issued from the
// following clock).  Only one command may be outstanding (asserted).  out_value
// always shows register R_OUT.
//
// The paper does not describe the storage of the control unit beyond putting
// all of the design's flip-flops in its CSIDH module; a single register file
// addressed by the FSMs is this design's choice.
module cu_regfile #(
  parameter int NW = csidh_pkg::NW512,
  localparam int W = 32 * NW,
  parameter logic [W-1:0] R2   = csidh_pkg::R2_512,
  parameter logic [W-1:0] MONE = csidh_pkg::ONE512
) (
  input  logic               clk,
  input  logic               rst_n,
  input  csidh_pkg::fe_cmd_t cmd,
  output csidh_pkg::fe_rsp_t rsp,
  input  logic [W-1:0]       ext_in,
  input  logic [W-1:0]       rnd,
  // ALU side (Fig. 1: OP, A, B out; result, State in)
  output logic               alu_start,
  output csidh_pkg::alu_op_e alu_op,
  output logic [W-1:0]       alu_a,
  output logic [W-1:0]       alu_b,
  input  logic               alu_done,
  input  logic [W-1:0]       alu_result,
  input  logic               alu_zero,
  output logic [W-1:0]       out_value
);
  import csidh_pkg::*;

  logic [W-1:0] rf [NREG];

  function automatic logic [W-1:0] rd(input raddr_t ad);
    unique case (ad)
      C_ZERO:  return '0;
      C_ONE:   return MONE;
      C_R2:    return R2;
      C_RAW1:  return W'(1);
      default: return rf[ad];
    endcase
  endfunction

  logic   busy, direct_q;
  raddr_t dst_q;
  logic   direct_zero_q;

  assign alu_start = cmd.valid && (cmd.op == FE_ADD || cmd.op == FE_SUB || cmd.op == FE_MUL);
  always_comb begin
    unique case (cmd.op)
      FE_SUB:  alu_op = ALU_SUB;
      FE_MUL:  alu_op = ALU_MUL;
      FE_ADD:  alu_op = ALU_ADD;
      default: alu_op = ALU_NOP;
    endcase
  end
  assign alu_a = rd(cmd.a);
  assign alu_b = rd(cmd.b);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      direct_q <= 1'b0;
      dst_q    <= '0;
    end else begin
      direct_q <= 1'b0;
      a_one_cmd: assert (!cmd.valid || !busy) else $error("cu_regfile: command while busy");
      a_no_const_write: assert (!cmd.valid || cmd.dst > C_RAW1)
        else $error("cu_regfile: write to a constant register");
      if (cmd.valid) begin
        busy  <= !(cmd.op == FE_RND || cmd.op == FE_LDIN);
        dst_q <= cmd.dst;
        direct_q <= (cmd.op == FE_RND || cmd.op == FE_LDIN);
      end else if (alu_done) begin
        busy <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (cmd.valid && cmd.op == FE_RND) begin
      rf[cmd.dst]   <= rnd;
      direct_zero_q <= (rnd == '0);
    end else if (cmd.valid && cmd.op == FE_LDIN) begin
      rf[cmd.dst]   <= ext_in;
      direct_zero_q <= (ext_in == '0);
    end else if (alu_done && busy) begin
      rf[dst_q] <= alu_result;
    end
  end

  assign rsp.done = direct_q || (alu_done && busy);
  assign rsp.zero = direct_q ? direct_zero_q : alu_zero;
  assign out_value = rf[R_OUT];
endmodule
