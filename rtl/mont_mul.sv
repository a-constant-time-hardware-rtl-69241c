// mont_mul: Montgomery modular multiplication, r = a * b * R^-1 mod p, R = 2^W.
//
// One mul512 core is used three times in a row:
//   T = a * b;  m = (T mod R) * pinv mod R;  U = m * p.
// Then T' = T + U is formed by a 2W-bit two-stage carry-select adder, the
// W+1 upper bits T'/R are taken and p is subtracted once by a two-stage
// borrow-select subtractor if T'/R >= p.  Inputs below p give a fully reduced
// result below p (R > 4p is assumed, true for CSIDH-512 and CSIDH-1024).
//
// Interface: start (one clock, a and b sampled with it) begins a product and
// aborts one in flight; done pulses for one clock with r valid; r holds until
// the next result.  Latency: 3 * (NW + 6 + MUL_CYC) + 5 clocks, 71 for the
// default 512-bit / MUL_CYC = 1 configuration.
//
// The reduction steps are the paper's (Algorithm 3); the paper reports 87
// cycles for the whole Montgomery multiplication, this design needs 71 because
// its sequencing between the steps is tighter.  The comparison T'/R >= p
// (the paper writes ">") is taken so that the result is always below p.
module mont_mul #(
  parameter int NW      = csidh_pkg::NW512,
  parameter int MUL_CYC = 1,
  localparam int W      = 32 * NW,
  parameter logic [W-1:0] P    = csidh_pkg::P512,
  parameter logic [W-1:0] PINV = csidh_pkg::PINV512
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] r
);
  typedef enum logic [2:0] {S_IDLE, S_MUL_AB, S_MUL_M, S_MUL_MP, S_ADD, S_RED} state_e;
  state_e st;

  logic           m_start, m_busy_unused, m_done;
  logic [W-1:0]   m_a, m_b;
  logic [2*W-1:0] m_p;

  mul512 #(.NW(NW), .MUL_CYC(MUL_CYC)) u_mul (
    .clk, .rst_n, .start(m_start), .a(m_a), .b(m_b),
    .busy(m_busy_unused), .done(m_done), .p(m_p)
  );

  logic [2*W-1:0] t_q;      // T = a*b

  always_comb begin
    m_start = 1'b0;
    m_a     = a;
    m_b     = b;
    if (start) begin
      m_start = 1'b1;
    end else if (m_done && st == S_MUL_AB) begin
      m_start = 1'b1; m_a = m_p[W-1:0]; m_b = PINV;
    end else if (m_done && st == S_MUL_M) begin
      m_start = 1'b1; m_a = m_p[W-1:0]; m_b = P;
    end
  end

  // T + m*p over 2W bits
  logic           add_v, add_c;
  logic [2*W-1:0] add_s;
  logic           unused_low;    // low half of T + m*p is zero by construction
  assign unused_low = |add_s[W-1:0];
  csa_add #(.NCH(2*NW)) u_add (
    .clk, .rst_n, .flush(start), .in_valid(m_done && st == S_MUL_MP && !start),
    .a(t_q), .b(m_p), .cin(1'b0), .out_valid(add_v), .sum(add_s), .cout(add_c)
  );

  // conditional subtraction of p
  logic         sub_v, sub_b;
  logic [W-1:0] sub_d;
  logic [W-1:0] tout_q;
  logic         tout_hi_q;
  csa_sub #(.NCH(NW)) u_sub (
    .clk, .rst_n, .in_valid(add_v && st == S_ADD && !start),
    .a(add_s[2*W-1:W]), .b(P), .bin(1'b0), .out_valid(sub_v), .diff(sub_d), .bout(sub_b)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
    end else if (start) begin
      st <= S_MUL_AB;
    end else begin
      unique case (st)
        S_MUL_AB: if (m_done) st <= S_MUL_M;
        S_MUL_M:  if (m_done) st <= S_MUL_MP;
        S_MUL_MP: if (m_done) st <= S_ADD;
        S_ADD:    if (add_v)  st <= S_RED;
        S_RED:    if (sub_v)  st <= S_IDLE;
        default:  st <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (m_done && st == S_MUL_AB) t_q <= m_p;
    if (add_v && st == S_ADD) begin
      tout_q    <= add_s[2*W-1:W];
      tout_hi_q <= add_c;
    end
    if (sub_v && st == S_RED && !start)
      r <= (tout_hi_q || !sub_b) ? sub_d : tout_q;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) done <= 1'b0;
    else done <= sub_v && st == S_RED && !start;

  assign busy = (st != S_IDLE);
endmodule
