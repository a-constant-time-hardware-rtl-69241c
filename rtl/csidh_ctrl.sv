// csidh_ctrl: top-level CSIDH FSM, computing the constant-time group action
// A' = [e] E_A (public-key generation when A = 0).
//
// It follows Algorithm 1 of the CSIDH key generation with the dummy-isogeny
// countermeasure.  Every prime l_i gets exactly EMAX isogenies, all in the
// direction given by the sign of e_i (the "constant-time vector" e_ct); while
// the true exponent e_i is still non-zero an isogeny is real, afterwards it is
// a dummy whose results are discarded.
//
//   load:   A (plain) -> Montgomery form; reject A >= p and the singular
//           A = +-2 (validate_basic); the curve is kept as (A+2C : 4C), C = 1.
//   rounds: for twist = 0 (e_i >= 0) and then twist = 1 (e_i < 0):
//           batch = up to BATCH primes that still owe isogenies in this
//           direction; an empty batch ends the direction.
//           P = random x (PRNG) accepted by xtwist as on the curve (twist = 0)
//           or on the twist (twist = 1), otherwise drawn again;
//           P = [4 * prod of primes outside the batch] P (one xmul per factor);
//           for i in the batch, highest first:
//             K = [prod of batch primes below i] P;  K = O -> skip i this round;
//             xisog(l_i) -> new curve and phi(P);  [l_i]P by xmul;
//             real: keep the new curve and P = phi(P), e_i moves towards 0;
//             dummy: keep the curve and P = [l_i]P;
//             both cases run the same operations: the choice is only which
//             register each of the four final copies reads.
//   check:  (VALIDATE = 1) a random point times p+1 = 4 * prod l_i must be O;
//   output: A' = (4 A24 - 2 C24) / C24 by xaffinize, out of Montgomery form,
//           into R_OUT.  A rejected input, a failed check or a fault reported
//           by any isogeny's [l]K test give success = 0 and a random A'.
//
// The sub-FSMs xmul, xisog, xtwist and xaffinize are instantiated here; their
// commands are OR-ed with this FSM's own into cmd (only one is non-idle at a
// time, asserted), and all of them share rsp.
//
// Interface: start (one clock) with a_in and private_key stable until done;
// done pulses with success and fault; busy is high in between.  A_out is
// register R_OUT of the register file.  Stat counters (real_cnt, dummy_cnt,
// skip_cnt, retry_cnt) are observable for tests.
//
// From the paper: the algorithm, batches of up to 16 primes, the e / e_ct
// scheme, the real/dummy rule including [l_i]P for dummies, the per-isogeny
// [l]K check, the optional [p+1]P validation and the output conversion.  This
// design's own choices: computing [k]P as a chain of small-scalar ladders,
// running [l_i]P for real isogenies too (discarded) so real and dummy steps
// have the same operation count, the random-x point generation, and counting
// faults of dummy isogenies as well.
module csidh_ctrl #(
  parameter int NW       = csidh_pkg::NW512,
  localparam int W       = 32 * NW,
  parameter logic [W-1:0] P = csidh_pkg::P512,
  parameter int NPRIMES  = csidh_pkg::NPRIMES512,
  parameter int LBITS    = csidh_pkg::LBITS,
  parameter logic [LBITS-1:0] PRIMES [NPRIMES] = csidh_pkg::PRIMES512,
  parameter int EMAX     = 5,
  parameter int BATCH    = 16,
  parameter bit VALIDATE = 1'b1,
  parameter bit FAULT_CHECK = 1'b1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [W-1:0]       a_in,
  input  logic signed [3:0]  private_key [NPRIMES],
  output logic               busy,
  output logic               done,
  output logic               success,
  output logic               fault,
  output logic               prng_load,
  output csidh_pkg::fe_cmd_t cmd,
  input  csidh_pkg::fe_rsp_t rsp
);
  import csidh_pkg::*;
  localparam int IB = (NPRIMES > 1) ? $clog2(NPRIMES) : 1;

  typedef enum logic [4:0] {
    S_IDLE, S_LOAD, S_ROUND, S_PT, S_PT_TW, S_PT_SET, S_MUL4, S_MLOOP, S_MCALL,
    S_PSAVE, S_ISEL, S_KCOPY, S_KTEST, S_ISO, S_LCOPY, S_COMMIT,
    S_VAL, S_VTEST, S_AFF, S_AFF_CALL, S_CONV, S_RANDOUT, S_DONE
  } state_e;
  state_e st, ret;            // ret: where S_MLOOP returns to

  // ---------------------------------------------------------------- key state
  logic [2:0]        cnt   [NPRIMES];   // isogenies still owed per prime (e_ct)
  logic signed [3:0] e_rem [NPRIMES];   // true exponent still to apply
  logic              sgn   [NPRIMES];   // direction: 1 = negative (twist)
  logic              tw;
  logic [NPRIMES-1:0] bm, bm_rem, mmask;
  logic [IB-1:0]     i_cur, j;
  logic              bad, val_ok, pend;
  logic [3:0]        pc;

  logic [31:0] real_cnt, dummy_cnt, skip_cnt, retry_cnt;

  // ---------------------------------------------------------------- sub-FSMs
  logic              xm_start, xm_done, xi_start, xi_done, xi_fault;
  logic              xt_start, xt_done, xt_qr, xt_zero, xa_start, xa_done;
  logic [LBITS-1:0]  xm_k;
  fe_cmd_t           own, xm_cmd, xi_cmd, xt_cmd, xa_cmd;

  xmul #(.LBITS(LBITS)) u_xmul (
    .clk, .rst_n, .start(xm_start), .k(xm_k), .done(xm_done), .cmd(xm_cmd), .rsp
  );
  xisog #(.LBITS(LBITS), .FAULT_CHECK(FAULT_CHECK)) u_xisog (
    .clk, .rst_n, .start(xi_start), .l(PRIMES[i_cur]), .done(xi_done), .fault(xi_fault),
    .cmd(xi_cmd), .rsp
  );
  xtwist #(.NW(NW), .P(P)) u_xtwist (
    .clk, .rst_n, .start(xt_start), .done(xt_done), .qr(xt_qr), .rhs_zero(xt_zero),
    .cmd(xt_cmd), .rsp
  );
  xaffinize #(.NW(NW), .P(P)) u_xaff (
    .clk, .rst_n, .start(xa_start), .done(xa_done), .cmd(xa_cmd), .rsp
  );

  assign cmd = fe_cmd_t'(own | xm_cmd | xi_cmd | xt_cmd | xa_cmd);

  // ---------------------------------------------------------------- batch
  logic [NPRIMES-1:0] batch;
  always_comb begin
    int nb;
    nb = 0;
    batch = '0;
    for (int q = 0; q < NPRIMES; q++)
      if (cnt[q] != 3'd0 && sgn[q] == tw && nb < BATCH) begin
        batch[q] = 1'b1;
        nb++;
      end
  end

  function automatic logic [IB-1:0] top_index(input logic [NPRIMES-1:0] v);
    top_index = '0;
    for (int q = 0; q < NPRIMES; q++) if (v[q]) top_index = IB'(q);
  endfunction

  function automatic logic [NPRIMES-1:0] below(input logic [IB-1:0] q);
    below = '0;
    for (int b = 0; b < NPRIMES; b++) if (b < int'(q)) below[b] = 1'b1;
  endfunction

  logic is_real;
  assign is_real = (e_rem[i_cur] != 4'sd0);

  // ---------------------------------------------------------------- own commands
  logic [3:0] last;
  always_comb begin
    own  = FE_IDLE;
    last = 4'd0;
    unique case (st)
      S_LOAD: begin
        last = 4'd5;
        unique case (pc)
          4'd0: own = fe(FE_LDIN, R_T0, C_ZERO, C_ZERO);
          4'd1: own = fe(FE_MUL, R_T0, R_T0, C_R2);
          4'd2: own = fe(FE_ADD, R_T1, C_ONE, C_ONE);
          4'd3: own = fe(FE_ADD, R_A24, R_T0, R_T1);    // A + 2, zero -> singular
          4'd4: own = fe(FE_SUB, R_C24, R_T0, R_T1);    // A - 2, zero -> singular
          default: own = fe(FE_ADD, R_C24, R_T1, R_T1); // 4C with C = 1
        endcase
      end
      S_PT: begin
        last = 4'd1;
        own = (pc == 4'd0) ? fe(FE_RND, R_TWX, C_ZERO, C_ZERO) : fe(FE_MUL, R_TWX, R_TWX, C_R2);
      end
      S_PT_SET: begin
        last = 4'd1;
        own = (pc == 4'd0) ? fe(FE_ADD, R_MX, R_TWX, C_ZERO) : fe(FE_ADD, R_MZ, C_ONE, C_ZERO);
      end
      S_PSAVE: begin
        last = 4'd1;
        own = (pc == 4'd0) ? fe(FE_ADD, R_PX, R_MX, C_ZERO) : fe(FE_ADD, R_PZ, R_MZ, C_ZERO);
      end
      S_KCOPY, S_LCOPY: begin
        last = 4'd1;
        own = (pc == 4'd0) ? fe(FE_ADD, R_MX, R_PX, C_ZERO) : fe(FE_ADD, R_MZ, R_PZ, C_ZERO);
      end
      S_KTEST, S_VTEST: own = fe(FE_ADD, R_T0, R_MZ, C_ZERO);
      S_COMMIT: begin
        last = 4'd3;
        unique case (pc)
          4'd0: own = fe(FE_ADD, R_A24, is_real ? R_NA24 : R_A24, C_ZERO);
          4'd1: own = fe(FE_ADD, R_C24, is_real ? R_NC24 : R_C24, C_ZERO);
          4'd2: own = fe(FE_ADD, R_PX,  is_real ? R_NPX  : R_MX,  C_ZERO);
          default: own = fe(FE_ADD, R_PZ, is_real ? R_NPZ : R_MZ, C_ZERO);
        endcase
      end
      S_VAL: begin
        last = 4'd2;
        unique case (pc)
          4'd0: own = fe(FE_RND, R_TWX, C_ZERO, C_ZERO);
          4'd1: own = fe(FE_MUL, R_MX, R_TWX, C_R2);
          default: own = fe(FE_ADD, R_MZ, C_ONE, C_ZERO);
        endcase
      end
      S_AFF: begin
        last = 4'd4;
        unique case (pc)
          4'd0: own = fe(FE_ADD, R_AFX, R_A24, R_A24);
          4'd1: own = fe(FE_ADD, R_AFX, R_AFX, R_AFX);
          4'd2: own = fe(FE_SUB, R_AFX, R_AFX, R_C24);
          4'd3: own = fe(FE_SUB, R_AFX, R_AFX, R_C24);
          default: own = fe(FE_ADD, R_AFZ, R_C24, C_ZERO);
        endcase
      end
      S_CONV: own = fe(FE_MUL, R_OUT, R_AFX, C_RAW1);
      S_RANDOUT: begin
        last = 4'd1;
        own = (pc == 4'd0) ? fe(FE_RND, R_OUT, C_ZERO, C_ZERO) : fe(FE_MUL, R_OUT, R_OUT, C_R2);
      end
      default: own = FE_IDLE;
    endcase
    if (pend) own = FE_IDLE;
  end

  // ---------------------------------------------------------------- sequencing
  logic sub_busy;
  assign xm_start = (st == S_MUL4 || st == S_MCALL) && !sub_busy;
  assign xm_k     = (st == S_MUL4) ? LBITS'(4) : PRIMES[j];
  assign xi_start = (st == S_ISO) && !sub_busy;
  assign xt_start = (st == S_PT_TW) && !sub_busy;
  assign xa_start = (st == S_AFF_CALL) && !sub_busy;
  assign prng_load = start && st == S_IDLE;
  assign busy = (st != S_IDLE);

  logic op_last;
  assign op_last = pend && rsp.done && (pc == last);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ret <= S_IDLE; pend <= 1'b0; pc <= '0; sub_busy <= 1'b0;
      tw <= 1'b0; bm <= '0; bm_rem <= '0; mmask <= '0; i_cur <= '0; j <= '0;
      bad <= 1'b0; val_ok <= 1'b0; done <= 1'b0; success <= 1'b0; fault <= 1'b0;
      real_cnt <= '0; dummy_cnt <= '0; skip_cnt <= '0; retry_cnt <= '0;
      for (int q = 0; q < NPRIMES; q++) begin
        cnt[q] <= '0; e_rem[q] <= '0; sgn[q] <= 1'b0;
      end
    end else begin
      done <= 1'b0;
      a_one_issuer: assert ($onehot0({own.valid, xm_cmd.valid, xi_cmd.valid, xt_cmd.valid, xa_cmd.valid}))
        else $error("csidh_ctrl: two FSMs issued a command in the same clock");
      // own command handshake
      if (own.valid) pend <= 1'b1;
      else if (pend && rsp.done) begin
        pend <= 1'b0;
        pc   <= (pc == last) ? 4'd0 : pc + 1'b1;
      end
      // sub-FSM call handshake
      if (xm_start || xi_start || xt_start || xa_start) sub_busy <= 1'b1;
      else if (xm_done || xi_done || xt_done || xa_done) sub_busy <= 1'b0;

      unique case (st)
        S_IDLE: if (start) begin
          st <= S_LOAD; pc <= '0; pend <= 1'b0; tw <= 1'b0;
          bad <= (a_in >= P); val_ok <= 1'b1; fault <= 1'b0; success <= 1'b0;
          real_cnt <= '0; dummy_cnt <= '0; skip_cnt <= '0; retry_cnt <= '0;
          for (int q = 0; q < NPRIMES; q++) begin
            cnt[q]   <= 3'(EMAX);
            e_rem[q] <= private_key[q];
            sgn[q]   <= private_key[q] < 0;
          end
        end
        S_LOAD: if (pend && rsp.done) begin
          if ((pc == 4'd3 || pc == 4'd4) && rsp.zero) bad <= 1'b1;
          if (pc == last) st <= bad ? S_RANDOUT : S_ROUND;
        end
        S_ROUND: begin
          if (batch == '0) begin
            if (tw) st <= VALIDATE ? S_VAL : S_AFF;
            else tw <= 1'b1;
          end else begin
            bm <= batch; bm_rem <= batch; st <= S_PT;
          end
        end
        S_PT: if (op_last) st <= S_PT_TW;
        S_PT_TW: if (xt_done) begin
          if (xt_zero || (xt_qr == tw)) begin st <= S_PT; retry_cnt <= retry_cnt + 1; end
          else st <= S_PT_SET;
        end
        S_PT_SET: if (op_last) begin st <= S_MUL4; ret <= S_PSAVE; end
        S_MUL4: if (xm_done) begin
          // then every prime outside the batch (or all primes when validating)
          st <= S_MLOOP; j <= '0;
          mmask <= (ret == S_VTEST) ? '1 : ~bm;
        end
        S_MLOOP: begin
          if (mmask == '0) st <= ret;
          else if (mmask[j]) st <= S_MCALL;
          else j <= j + 1'b1;
        end
        S_MCALL: if (xm_done) begin
          mmask[j] <= 1'b0;
          j <= j + 1'b1;
          st <= S_MLOOP;
        end
        S_PSAVE: if (op_last) st <= S_ISEL;
        S_ISEL: begin
          if (bm_rem == '0) st <= S_ROUND;
          else begin
            i_cur <= top_index(bm_rem);
            bm_rem[top_index(bm_rem)] <= 1'b0;
            st <= S_KCOPY;
          end
        end
        S_KCOPY: if (op_last) begin
          st <= S_MLOOP; j <= '0; mmask <= bm & below(i_cur); ret <= S_KTEST;
        end
        S_KTEST: if (pend && rsp.done) begin
          if (rsp.zero) begin st <= S_ISEL; skip_cnt <= skip_cnt + 1; end
          else st <= S_ISO;
        end
        S_ISO: if (xi_done) begin
          if (xi_fault) fault <= 1'b1;
          st <= S_LCOPY;
        end
        S_LCOPY: if (op_last) begin
          st <= S_MLOOP; j <= '0; mmask <= '0; mmask[i_cur] <= 1'b1; ret <= S_COMMIT;
        end
        S_COMMIT: if (op_last) begin
          cnt[i_cur] <= cnt[i_cur] - 1'b1;
          if (is_real) begin
            e_rem[i_cur] <= sgn[i_cur] ? e_rem[i_cur] + 4'sd1 : e_rem[i_cur] - 4'sd1;
            real_cnt <= real_cnt + 1;
          end else begin
            dummy_cnt <= dummy_cnt + 1;
          end
          st <= S_ISEL;
        end
        S_VAL: if (op_last) begin st <= S_MUL4; ret <= S_VTEST; end
        S_VTEST: if (pend && rsp.done) begin
          val_ok <= rsp.zero;
          st <= S_AFF;
        end
        S_AFF: if (op_last) st <= S_AFF_CALL;
        S_AFF_CALL: if (xa_done) st <= S_CONV;
        S_CONV: if (pend && rsp.done) st <= (val_ok && !fault) ? S_DONE : S_RANDOUT;
        S_RANDOUT: if (op_last) begin st <= S_DONE; bad <= 1'b1; end
        S_DONE: begin
          st <= S_IDLE; done <= 1'b1;
          success <= !bad && val_ok && !fault;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
