// mul512: parallel, pipelined schoolbook multiplier, p = a * b (W x W -> 2W bits).
//
// Operand a is split into NW 32-bit chunks and processed by two lanes working in
// parallel: the lower lane takes chunks 0 .. NW/2-1, the upper lane chunks
// NW/2 .. NW-1.  Each lane has NW 32x32 multipliers and per chunk a_k runs
// three phases:
//   1. partial products a_k * b_j for all j at once (MUL_CYC clocks);
//   2. folding: the NW 64-bit products overlap by 32 bits, so the (NW+1)-word
//      chunk product is  {lo words} + ({hi words} << 32), done by a two-stage
//      carry-select adder (csa_add);
//   3. accumulation of the chunk product, shifted by 32*k, into the lane's
//      2W-bit accumulator with a two-stage carry-select add.
// The accumulator add of chunk k must finish before that of chunk k+1 reads the
// accumulator, so a lane issues a chunk every second clock: the one-cycle stall
// the paper describes.  A two-cycle multiplier (MUL_CYC = 2) hides in that
// stall and adds a single clock overall.  Finally the two lane accumulators are
// added by another two-stage carry-select adder.
//
// Interface: start (one clock, a and b sampled with it) begins a product and
// aborts any product in flight; done pulses with p valid.  Latency from the
// start clock to the done clock is NW + 6 + MUL_CYC = 22 (MUL_CYC = 1, FPGA DSP
// version) or 23 (MUL_CYC = 2, Booth ASIC version) for NW = 16.  p holds until
// the next product finishes.
//
// Lanes, chunking, the three phases, the stall, the final merge and both
// latencies are the paper's (Sec. III-A.3, Fig. 3, Algorithm 4).  MUL_CYC = 1
// models the FPGA DSP multiplier with a registered '*'; MUL_CYC = 2 uses the
// paper's Booth unit (booth_mul32).
module mul512 #(
  parameter int NW      = csidh_pkg::NW512,
  parameter int MUL_CYC = 1,
  localparam int W      = 32 * NW
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   a,
  input  logic [W-1:0]   b,
  output logic           busy,
  output logic           done,
  output logic [2*W-1:0] p
);
  localparam int CPL = NW / 2;                 // chunks per lane
  localparam int KB  = (CPL > 1) ? $clog2(CPL) : 1;

  logic [W-1:0]  a_q, b_q;
  logic [KB:0]   issue_cnt;                    // chunks issued per lane
  logic          phase;                        // issue on phase 0 only
  logic          run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run       <= 1'b0;
      issue_cnt <= '0;
      phase     <= 1'b0;
    end else if (start) begin
      run       <= 1'b1;
      issue_cnt <= '0;
      phase     <= 1'b0;
    end else if (run) begin
      phase <= ~phase;
      if (!phase) begin
        issue_cnt <= issue_cnt + 1'b1;
        if (issue_cnt == (KB+1)'(CPL - 1)) run <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk)
    if (start) begin
      a_q <= a;
      b_q <= b;
    end

  logic issue;
  assign issue = run && !phase;

  logic [2*W-1:0] acc [2];
  logic           acc_v1_l [2];                // lane accumulator stage-1 tag
  logic [KB-1:0]  k_last_l [2];                // chunk index in accumulator stage 2

  for (genvar l = 0; l < 2; l++) begin : g_lane
    // ---- phase 1: NW partial products of one a-chunk ---------------------
    logic [31:0] a_chunk;
    assign a_chunk = a_q[32*(l*CPL + int'(issue_cnt[KB-1:0])) +: 32];

    logic [63:0] pp [NW];
    logic        pp_v;
    logic [KB-1:0] k_pipe [MUL_CYC + 4];       // chunk index travelling with the data
    logic [KB-1:0] k_in;
    assign k_in = issue_cnt[KB-1:0];

    for (genvar j = 0; j < NW; j++) begin : g_mul
      logic v_unused;
      if (MUL_CYC == 2) begin : g_booth
        booth_mul32 u_m (
          .clk, .rst_n, .in_valid(issue), .a(a_chunk), .b(b_q[32*j +: 32]),
          .out_valid(v_unused), .p(pp[j])
        );
      end else begin : g_dsp
        always_ff @(posedge clk) pp[j] <= {32'b0, a_chunk} * {32'b0, b_q[32*j +: 32]};
        assign v_unused = 1'b0;
      end
    end

    logic [MUL_CYC:0] mv;                      // issue tag, one bit per multiplier stage
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) mv <= '0;
      else if (start) mv <= '0;
      else mv <= {mv[MUL_CYC-1:0], issue};
    assign pp_v = mv[MUL_CYC-1];

    always_ff @(posedge clk) begin
      k_pipe[0] <= k_in;
      for (int s = 1; s < MUL_CYC + 4; s++) k_pipe[s] <= k_pipe[s-1];
    end

    // ---- phase 2: fold the overlapping products into NW+1 words ----------
    logic [32*(NW+1)-1:0] lo_words, hi_words, chunk;
    always_comb begin
      lo_words = '0;
      hi_words = '0;
      for (int j = 0; j < NW; j++) begin
        lo_words[32*j +: 32]     = pp[j][31:0];
        hi_words[32*(j+1) +: 32] = pp[j][63:32];
      end
    end
    logic chunk_v, fold_c_unused;
    csa_add #(.NCH(NW+1)) u_fold (
      .clk, .rst_n, .flush(start), .in_valid(pp_v && !start), .a(lo_words), .b(hi_words), .cin(1'b0),
      .out_valid(chunk_v), .sum(chunk), .cout(fold_c_unused)
    );
    logic [KB-1:0] chunk_k;
    assign chunk_k = k_pipe[MUL_CYC + 1];

    // ---- phase 3: accumulate chunk << 32*(lane offset + k) ---------------
    logic [2*W-1:0] addend;
    always_comb begin
      addend = '0;
      addend[32*(NW+1)-1:0] = chunk;
      addend = addend << (32 * (l*CPL + int'(chunk_k)));
    end
    logic [32:0] s0_q [2*NW];
    logic [32:0] s1_q [2*NW];
    logic        acc_v1;
    always_ff @(posedge clk)
      for (int i = 0; i < 2*NW; i++) begin
        s0_q[i] <= {1'b0, acc[l][32*i +: 32]} + {1'b0, addend[32*i +: 32]};
        s1_q[i] <= {1'b0, acc[l][32*i +: 32]} + {1'b0, addend[32*i +: 32]} + 33'd1;
      end
    logic [2*W-1:0] acc_next;
    logic [2*NW:0]  c;
    always_comb begin
      c[0] = 1'b0;
      for (int i = 0; i < 2*NW; i++) begin
        acc_next[32*i +: 32] = c[i] ? s1_q[i][31:0] : s0_q[i][31:0];
        c[i+1]               = c[i] ? s1_q[i][32]   : s0_q[i][32];
      end
    end
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) acc_v1 <= 1'b0;
      else acc_v1 <= chunk_v && !start;
    always_ff @(posedge clk)
      if (start) acc[l] <= '0;
      else if (acc_v1) acc[l] <= acc_next;
    assign acc_v1_l[l] = acc_v1;
    assign k_last_l[l] = k_pipe[MUL_CYC + 2];
  end

  // Both lanes run in lock-step; the lower lane's last accumulation, which
  // completes with its stage-2 clock, starts the merge.
  logic acc_last_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) acc_last_q <= 1'b0;
    else acc_last_q <= acc_v1_l[0] && (k_last_l[0] == KB'(CPL - 1)) && !start;

  // ---- phase 4: merge the two lane accumulators --------------------------
  logic merge_v, merge_c_unused;
  csa_add #(.NCH(2*NW)) u_merge (
    .clk, .rst_n, .flush(start), .in_valid(acc_last_q && !start), .a(acc[0]), .b(acc[1]), .cin(1'b0),
    .out_valid(merge_v), .sum(p), .cout(merge_c_unused)
  );

  logic pend;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) pend <= 1'b0;
    else if (start) pend <= 1'b1;
    else if (merge_v) pend <= 1'b0;

  assign done = merge_v && pend;
  assign busy = pend;
endmodule
