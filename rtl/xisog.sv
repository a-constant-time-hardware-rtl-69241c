// xisog: evaluates an odd-degree-l isogeny with kernel <K> on the curve and on P.
//
// Inputs in the register file: the curve (R_A24 = A+2C, R_C24 = 4C), the
// point P (R_PX/R_PZ) and a kernel point K of order l (R_MX/R_MZ).  Outputs:
// the image curve in R_NA24/R_NC24 (same representation) and phi(P) in
// R_NPX/R_NPZ; the inputs are left unchanged so that the caller can decide
// whether to keep the result (real isogeny) or drop it (dummy isogeny).
//
// Phases (d = (l-1)/2):
//  * init: XP+ZP, XP-ZP, XK+ZK, XK-ZK; four running products set to 1; the
//    first kernel multiple [1]K copied into a three-slot sliding window.
//  * loop i = 1..d: with S = Xi+Zi and D = Xi-Zi of [i]K, the curve products
//    pi+ *= S, pi- *= D, and with u = (XP-ZP)S, v = (XP+ZP)D the point
//    products Pp *= u+v, Pm *= u-v (Costello-Hisil).  Then the next multiple
//    [i+1]K is formed in the free slot: by doubling for i = 1, otherwise by the
//    differential addition [i]K + K with difference [i-1]K.  The window
//    pointers rotate, so only three points are ever stored.
//  * fault check (FAULT_CHECK = 1): [l]K = [d+1]K + [d]K (difference K) is
//    formed and its Z must be zero; otherwise fault is raised with done.
//  * finalisation: phi(P) = (XP Pp^2 : ZP Pm^2); with a = A+2C, d = A-2C
//    (Edwards form, Meyer-Reith), a' = a^l pi+^8 and d' = d^l pi-^8; the new
//    curve is kept as A24' = a', C24' = a' - d', which is (A'+2C' : 4C') up
//    to a common factor.  a^l and d^l use square-and-multiply over the public l.
//
// Interface: start (one clock) with l (odd, >= 3, stable until done); done
// pulses at the end together with fault.  cmd / rsp go to the register file.
//
// The three phases, the running products, the sliding window, the Edwards
// detour for the curve and the optional [l]K check follow the paper (Sec. II-B
// and the xISOG description).  The operation order and registers are this
// design's.
module xisog #(
  parameter int LBITS       = csidh_pkg::LBITS,
  parameter bit FAULT_CHECK = 1'b1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [LBITS-1:0]   l,
  output logic               done,
  output logic               fault,
  output csidh_pkg::fe_cmd_t cmd,
  input  csidh_pkg::fe_rsp_t rsp
);
  import csidh_pkg::*;

  typedef enum logic [2:0] {S_IDLE, S_INIT, S_PROD, S_NEXT, S_FAULT, S_FIN1, S_POW, S_FIN2} state_e;
  state_e st;
  logic       pend;
  logic [3:0] pc;
  logic [LBITS-1:0] i, d;
  logic [1:0] s_prev, s_cur, s_nxt;          // window slots
  logic [$clog2(LBITS)-1:0] bi;               // exponent bit

  function automatic raddr_t sx(input logic [1:0] s); return R_W0X + raddr_t'({s, 1'b0}); endfunction
  function automatic raddr_t sz(input logic [1:0] s); return R_W0Z + raddr_t'({s, 1'b0}); endfunction

  function automatic logic [$clog2(LBITS)-1:0] msb(input logic [LBITS-1:0] v);
    msb = '0;
    for (int b = 0; b < LBITS; b++) if (v[b]) msb = ($clog2(LBITS))'(b);
  endfunction

  // number of operations in the current state
  logic [3:0] last;
  always_comb begin
    unique case (st)
      S_INIT:  last = 4'd11;
      S_PROD:  last = 4'd9;
      S_NEXT:  last = 4'd7;
      S_FAULT: last = 4'd8;
      S_FIN1:  last = 4'd6;
      S_POW:   last = l[bi] ? 4'd3 : 4'd1;
      S_FIN2:  last = 4'd8;
      default: last = 4'd0;
    endcase
  end

  fe_cmd_t c;
  always_comb begin
    c = FE_IDLE;
    unique case (st)
      S_INIT: unique case (pc)
        4'd0:  c = fe(FE_ADD, R_ITP, R_PX, R_PZ);
        4'd1:  c = fe(FE_SUB, R_ITM, R_PX, R_PZ);
        4'd2:  c = fe(FE_ADD, R_IKP, R_MX, R_MZ);
        4'd3:  c = fe(FE_SUB, R_IKM, R_MX, R_MZ);
        4'd4:  c = fe(FE_ADD, sx(s_cur), R_MX, C_ZERO);
        4'd5:  c = fe(FE_ADD, sz(s_cur), R_MZ, C_ZERO);
        4'd6:  c = fe(FE_ADD, R_IPP, C_ONE, C_ZERO);
        4'd7:  c = fe(FE_ADD, R_IPM, C_ONE, C_ZERO);
        4'd8:  c = fe(FE_ADD, R_ISP, C_ONE, C_ZERO);
        4'd9:  c = fe(FE_ADD, R_ISM, C_ONE, C_ZERO);
        4'd10: c = fe(FE_ADD, R_NA24, R_A24, C_ZERO);
        default: c = fe(FE_ADD, R_NC24, R_C24, C_ZERO);
      endcase
      S_PROD: unique case (pc)            // consume [i]K into the products
        4'd0: c = fe(FE_ADD, R_IS, sx(s_cur), sz(s_cur));
        4'd1: c = fe(FE_SUB, R_ID, sx(s_cur), sz(s_cur));
        4'd2: c = fe(FE_MUL, R_ISP, R_ISP, R_IS);
        4'd3: c = fe(FE_MUL, R_ISM, R_ISM, R_ID);
        4'd4: c = fe(FE_MUL, R_IU, R_ITM, R_IS);
        4'd5: c = fe(FE_MUL, R_IV, R_ITP, R_ID);
        4'd6: c = fe(FE_ADD, R_IEA, R_IU, R_IV);
        4'd7: c = fe(FE_MUL, R_IPP, R_IPP, R_IEA);
        4'd8: c = fe(FE_SUB, R_IEA, R_IU, R_IV);
        default: c = fe(FE_MUL, R_IPM, R_IPM, R_IEA);
      endcase
      S_NEXT: if (i == 1) begin           // [2]K = xDBL(K), S = X+Z, D = X-Z
        unique case (pc)
          4'd0: c = fe(FE_MUL, R_IU, R_IS, R_IS);
          4'd1: c = fe(FE_MUL, R_IV, R_ID, R_ID);
          4'd2: c = fe(FE_MUL, sz(s_nxt), R_C24, R_IV);
          4'd3: c = fe(FE_MUL, sx(s_nxt), sz(s_nxt), R_IU);
          4'd4: c = fe(FE_SUB, R_IU, R_IU, R_IV);
          4'd5: c = fe(FE_MUL, R_IV, R_A24, R_IU);
          4'd6: c = fe(FE_ADD, sz(s_nxt), sz(s_nxt), R_IV);
          default: c = fe(FE_MUL, sz(s_nxt), sz(s_nxt), R_IU);
        endcase
      end else begin                      // [i+1]K = [i]K + K, difference [i-1]K
        unique case (pc)
          4'd0: c = fe(FE_MUL, R_IU, R_ID, R_IKP);
          4'd1: c = fe(FE_MUL, R_IV, R_IS, R_IKM);
          4'd2: c = fe(FE_ADD, R_IS, R_IU, R_IV);
          4'd3: c = fe(FE_SUB, R_ID, R_IU, R_IV);
          4'd4: c = fe(FE_MUL, R_IS, R_IS, R_IS);
          4'd5: c = fe(FE_MUL, R_ID, R_ID, R_ID);
          4'd6: c = fe(FE_MUL, sx(s_nxt), sz(s_prev), R_IS);
          default: c = fe(FE_MUL, sz(s_nxt), sx(s_prev), R_ID);
        endcase
      end
      S_FAULT: unique case (pc)           // Z of [d+1]K + [d]K, difference K
        4'd0: c = fe(FE_SUB, R_IS, sx(s_cur), sz(s_cur));
        4'd1: c = fe(FE_ADD, R_ID, sx(s_prev), sz(s_prev));
        4'd2: c = fe(FE_MUL, R_IU, R_IS, R_ID);
        4'd3: c = fe(FE_ADD, R_IS, sx(s_cur), sz(s_cur));
        4'd4: c = fe(FE_SUB, R_ID, sx(s_prev), sz(s_prev));
        4'd5: c = fe(FE_MUL, R_IV, R_IS, R_ID);
        4'd6: c = fe(FE_SUB, R_IU, R_IU, R_IV);
        4'd7: c = fe(FE_MUL, R_IU, R_IU, R_IU);
        default: c = fe(FE_MUL, R_IU, R_MX, R_IU);
      endcase
      S_FIN1: unique case (pc)
        4'd0: c = fe(FE_MUL, R_IPP, R_IPP, R_IPP);
        4'd1: c = fe(FE_MUL, R_IPM, R_IPM, R_IPM);
        4'd2: c = fe(FE_MUL, R_NPX, R_PX, R_IPP);
        4'd3: c = fe(FE_MUL, R_NPZ, R_PZ, R_IPM);
        4'd4: c = fe(FE_SUB, R_IDD, R_A24, R_C24);
        4'd5: c = fe(FE_ADD, R_IEA, R_A24, C_ZERO);
        default: c = fe(FE_ADD, R_IED, R_IDD, C_ZERO);
      endcase
      S_POW: unique case (pc)
        4'd0: c = fe(FE_MUL, R_IEA, R_IEA, R_IEA);
        4'd1: c = fe(FE_MUL, R_IED, R_IED, R_IED);
        4'd2: c = fe(FE_MUL, R_IEA, R_IEA, R_A24);
        default: c = fe(FE_MUL, R_IED, R_IED, R_IDD);
      endcase
      S_FIN2: unique case (pc)
        4'd0, 4'd2, 4'd4: c = fe(FE_MUL, R_ISP, R_ISP, R_ISP);
        4'd1, 4'd3, 4'd5: c = fe(FE_MUL, R_ISM, R_ISM, R_ISM);
        4'd6: c = fe(FE_MUL, R_NA24, R_IEA, R_ISP);
        4'd7: c = fe(FE_MUL, R_IED, R_IED, R_ISM);
        default: c = fe(FE_SUB, R_NC24, R_NA24, R_IED);
      endcase
      default: c = FE_IDLE;
    endcase
    if (pend) c = FE_IDLE;
  end
  assign cmd = c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; pend <= 1'b0; pc <= '0; i <= '0; d <= '0; bi <= '0;
      s_prev <= 2'd2; s_cur <= 2'd0; s_nxt <= 2'd1;
      done <= 1'b0; fault <= 1'b0;
    end else begin
      done <= 1'b0;
      if (st == S_IDLE) begin
        if (start) begin
          st <= S_INIT; pc <= '0; pend <= 1'b0; fault <= 1'b0;
          i <= LBITS'(1); d <= l >> 1;
          s_prev <= 2'd2; s_cur <= 2'd0; s_nxt <= 2'd1;
        end
      end else if (c.valid) begin
        pend <= 1'b1;
      end else if (pend && rsp.done) begin
        pend <= 1'b0;
        pc   <= pc + 1'b1;
        if (pc == last) begin
          pc <= '0;
          unique case (st)
            S_INIT: st <= S_PROD;
            S_PROD: st <= S_NEXT;
            S_NEXT: begin
              s_prev <= s_cur; s_cur <= s_nxt; s_nxt <= s_prev;
              if (i == d) st <= FAULT_CHECK ? S_FAULT : S_FIN1;
              else begin i <= i + 1'b1; st <= S_PROD; end
            end
            S_FAULT: begin
              fault <= !rsp.zero;
              st <= S_FIN1;
            end
            S_FIN1: begin st <= S_POW; bi <= msb(l) - 1'b1; end
            S_POW:  if (bi == '0) st <= S_FIN2; else bi <= bi - 1'b1;
            S_FIN2: begin st <= S_IDLE; done <= 1'b1; end
            default: st <= S_IDLE;
          endcase
        end
      end
    end
  end
endmodule
