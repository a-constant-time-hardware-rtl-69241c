// xmul: x-only scalar multiplication [k]P by the Montgomery ladder.
//
// The point is taken from and returned to registers R_MX / R_MZ.  The ladder
// keeps R0 in R_L0X/Z, R1 in R_L1X/Z and the fixed difference P in
// R_LDX/Z.  It starts from R0 = O = (1:0), R1 = P and walks the bits of k from
// its most significant set bit down; each bit is one xdbladd call:
// bit 0 -> (R0, R1) = ([2]R0, R0 + R1), bit 1 -> (R1, R0) = ([2]R1, R0 + R1),
// the swap being made by handing xdbladd the register addresses in the other
// order, so no data is moved.  At the end R0 = [k]P is copied back.  The point
// at infinity (Z = 0) stays at infinity.
//
// Interface: start (one clock) with the scalar k (>= 1, LBITS bits, stable
// until done); done pulses when [k]P is in R_MX / R_MZ.  cmd / rsp go to the
// register file; the embedded xdbladd's commands are merged into cmd.
// Cost: 8 copies plus bitlength(k) xdbladd calls.
//
// The paper gives the function (scalar multiplication sequencing doublings
// and additions through xDBLADD).  Scalars here are the small public primes
// l_i (and 4); [k]P for a product k is formed as a chain of such calls by the
// caller, which gives the same point.
module xmul #(
  parameter int LBITS = csidh_pkg::LBITS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [LBITS-1:0]   k,
  output logic               done,
  output csidh_pkg::fe_cmd_t cmd,
  input  csidh_pkg::fe_rsp_t rsp
);
  import csidh_pkg::*;

  typedef enum logic [1:0] {S_IDLE, S_INIT, S_LADDER, S_FIN} state_e;
  state_e st;
  logic       pend, dba_start, dba_done, dba_busy;
  logic [2:0] pc;
  logic [$clog2(LBITS)-1:0] bi;
  fe_cmd_t    own, dba_cmd;

  // most significant set bit of k
  function automatic logic [$clog2(LBITS)-1:0] msb(input logic [LBITS-1:0] v);
    msb = '0;
    for (int i = 0; i < LBITS; i++) if (v[i]) msb = ($clog2(LBITS))'(i);
  endfunction

  always_comb begin
    own = FE_IDLE;
    if (!pend && st == S_INIT) begin
      unique case (pc)
        3'd0: own = fe(FE_ADD, R_L0X, C_ONE,  C_ZERO);
        3'd1: own = fe(FE_ADD, R_L0Z, C_ZERO, C_ZERO);
        3'd2: own = fe(FE_ADD, R_L1X, R_MX,   C_ZERO);
        3'd3: own = fe(FE_ADD, R_L1Z, R_MZ,   C_ZERO);
        3'd4: own = fe(FE_ADD, R_LDX, R_MX,   C_ZERO);
        default: own = fe(FE_ADD, R_LDZ, R_MZ, C_ZERO);
      endcase
    end else if (!pend && st == S_FIN) begin
      own = (pc == 3'd0) ? fe(FE_ADD, R_MX, R_L0X, C_ZERO) : fe(FE_ADD, R_MZ, R_L0Z, C_ZERO);
    end
  end

  logic bitv;
  assign bitv = k[bi];

  xdbladd u_dbladd (
    .clk, .rst_n, .start(dba_start),
    .px(bitv ? R_L1X : R_L0X), .pz(bitv ? R_L1Z : R_L0Z),
    .qx(bitv ? R_L0X : R_L1X), .qz(bitv ? R_L0Z : R_L1Z),
    .done(dba_done), .cmd(dba_cmd), .rsp
  );

  assign cmd = fe_cmd_t'(own | dba_cmd);
  assign dba_start = (st == S_LADDER) && !dba_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; pend <= 1'b0; pc <= '0; bi <= '0; done <= 1'b0; dba_busy <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin st <= S_INIT; pc <= '0; pend <= 1'b0; end
        S_INIT, S_FIN: begin
          if (own.valid) pend <= 1'b1;
          else if (pend && rsp.done) begin
            pend <= 1'b0;
            pc   <= pc + 1'b1;
            if (st == S_INIT && pc == 3'd5) begin
              st <= S_LADDER; pc <= '0; bi <= msb(k); dba_busy <= 1'b0;
            end
            if (st == S_FIN && pc == 3'd1) begin
              st <= S_IDLE; done <= 1'b1;
            end
          end
        end
        S_LADDER: begin
          if (dba_start) dba_busy <= 1'b1;
          else if (dba_done) begin
            dba_busy <= 1'b0;
            if (bi == '0) begin st <= S_FIN; pc <= '0; end
            else bi <= bi - 1'b1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
