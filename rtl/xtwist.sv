// xtwist: decides whether x is the x-coordinate of a point on the curve or on
// its quadratic twist.
//
// With the curve held as A24 = l(A+2C), C24 = l(4C), let Ah = 4 A24 - 2 C24
// (= 4lA) and Ch = C24 (= 4lC).  The curve's right-hand side x^3 + (A/C)x^2 + x
// times the square Ch^2 is  w = Ch x (Ch x^2 + Ah x + Ch),  which has the same
// quadratic character.  Euler's criterion w^((p-1)/2) = 1 then means x is on
// the curve (qr = 1), p-1 means on the twist (qr = 0), and w = 0 (rhs_zero)
// means x belongs to a point of order 2.  The exponentiation is left-to-right
// square-and-multiply over the public constant (p-1)/2.
//
// Interface: x in R_TWX (Montgomery form); start (one clock); done pulses with
// qr and rhs_zero valid until the next start.  Scratch R_TWW, R_TWA, R_TWH.
// cmd / rsp go to the register file.
//
// The paper gives the function (evaluate the curve equation's right-hand side
// and test it for quadratic residuosity); the Euler-criterion test and the
// projective scaling are this design's.
module xtwist #(
  parameter int NW = csidh_pkg::NW512,
  localparam int W = 32 * NW,
  parameter logic [W-1:0] P = csidh_pkg::P512
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               done,
  output logic               qr,
  output logic               rhs_zero,
  output csidh_pkg::fe_cmd_t cmd,
  input  csidh_pkg::fe_rsp_t rsp
);
  import csidh_pkg::*;
  localparam logic [W-1:0] E = (P - W'(1)) >> 1;
  localparam int EB = $clog2(W);

  function automatic int msb_of(input logic [W-1:0] v);
    msb_of = 0;
    for (int b = 0; b < W; b++) if (v[b]) msb_of = b;
  endfunction
  localparam int EMSB = msb_of(E);

  typedef enum logic [1:0] {S_IDLE, S_RHS, S_POW, S_TEST} state_e;
  state_e st;
  logic       pend;
  logic [3:0] pc;
  logic [EB-1:0] bi;

  fe_cmd_t c;
  always_comb begin
    c = FE_IDLE;
    unique case (st)
      S_RHS: unique case (pc)
        4'd0:  c = fe(FE_ADD, R_TWH, R_A24, R_A24);
        4'd1:  c = fe(FE_ADD, R_TWH, R_TWH, R_TWH);
        4'd2:  c = fe(FE_SUB, R_TWH, R_TWH, R_C24);
        4'd3:  c = fe(FE_SUB, R_TWH, R_TWH, R_C24);     // Ah
        4'd4:  c = fe(FE_MUL, R_TWW, R_TWX, R_TWX);
        4'd5:  c = fe(FE_MUL, R_TWW, R_TWW, R_C24);     // Ch x^2
        4'd6:  c = fe(FE_MUL, R_TWA, R_TWH, R_TWX);     // Ah x
        4'd7:  c = fe(FE_ADD, R_TWW, R_TWW, R_TWA);
        4'd8:  c = fe(FE_ADD, R_TWW, R_TWW, R_C24);
        4'd9:  c = fe(FE_MUL, R_TWW, R_TWW, R_TWX);
        4'd10: c = fe(FE_MUL, R_TWW, R_TWW, R_C24);     // w
        default: c = fe(FE_ADD, R_TWA, R_TWW, C_ZERO);  // accumulator = w (msb of E)
      endcase
      S_POW:  c = (pc == 4'd0) ? fe(FE_MUL, R_TWA, R_TWA, R_TWA) : fe(FE_MUL, R_TWA, R_TWA, R_TWW);
      S_TEST: c = fe(FE_SUB, R_TWH, R_TWA, C_ONE);
      default: c = FE_IDLE;
    endcase
    if (pend) c = FE_IDLE;
  end
  assign cmd = c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; pend <= 1'b0; pc <= '0; bi <= '0; done <= 1'b0; qr <= 1'b0; rhs_zero <= 1'b0;
    end else begin
      done <= 1'b0;
      if (st == S_IDLE) begin
        if (start) begin st <= S_RHS; pend <= 1'b0; pc <= '0; end
      end else if (c.valid) begin
        pend <= 1'b1;
      end else if (pend && rsp.done) begin
        pend <= 1'b0;
        unique case (st)
          S_RHS: begin
            if (pc == 4'd10) rhs_zero <= rsp.zero;
            if (pc == 4'd11) begin st <= S_POW; bi <= EB'(EMSB - 1); pc <= '0; end
            else pc <= pc + 1'b1;
          end
          S_POW: begin
            if (pc == 4'd0 && E[bi]) pc <= 4'd1;
            else begin
              pc <= '0;
              if (bi == '0) st <= S_TEST; else bi <= bi - 1'b1;
            end
          end
          S_TEST: begin st <= S_IDLE; done <= 1'b1; qr <= rsp.zero; end
          default: st <= S_IDLE;
        endcase
      end
    end
  end
endmodule
