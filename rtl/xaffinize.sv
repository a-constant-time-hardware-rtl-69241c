// xaffinize: projective-to-affine conversion x = X / Z by one field inversion.
//
// Reads X from R_AFX and Z from R_AFZ and writes X / Z back to R_AFX.  The
// inverse is Z^(p-2) (Fermat), computed by left-to-right square-and-multiply
// over the bits of the public constant p-2 in the accumulator R_AFA, so the
// operation sequence depends on p only, never on the data.  Z = 0 gives 0.
//
// Interface: start (one clock); done pulses when R_AFX holds the result.
// cmd / rsp go to the register file.  Cost: bitlength(p) - 1 squarings plus
// one multiplication per further set bit of p-2, plus two operations; about
// 766 multiplications for CSIDH-512.
//
// The paper gives the function (one inversion of Z producing the affine
// x-coordinate for the final key); the choice of Fermat inversion is this
// design's.
module xaffinize #(
  parameter int NW = csidh_pkg::NW512,
  localparam int W = 32 * NW,
  parameter logic [W-1:0] P = csidh_pkg::P512
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               done,
  output csidh_pkg::fe_cmd_t cmd,
  input  csidh_pkg::fe_rsp_t rsp
);
  logic unused_zero;             // the zero flag is not needed here
  assign unused_zero = rsp.zero;
  import csidh_pkg::*;
  localparam logic [W-1:0] E = P - W'(2);
  localparam int EB = $clog2(W);

  function automatic int msb_of(input logic [W-1:0] v);
    msb_of = 0;
    for (int b = 0; b < W; b++) if (v[b]) msb_of = b;
  endfunction
  localparam int EMSB = msb_of(E);

  typedef enum logic [1:0] {S_IDLE, S_INIT, S_POW, S_FIN} state_e;
  state_e st;
  logic       pend;
  logic       pc;
  logic [EB-1:0] bi;

  fe_cmd_t c;
  always_comb begin
    c = FE_IDLE;
    unique case (st)
      S_INIT: c = fe(FE_ADD, R_AFA, R_AFZ, C_ZERO);
      S_POW:  c = (pc == 1'b0) ? fe(FE_MUL, R_AFA, R_AFA, R_AFA) : fe(FE_MUL, R_AFA, R_AFA, R_AFZ);
      S_FIN:  c = fe(FE_MUL, R_AFX, R_AFX, R_AFA);
      default: c = FE_IDLE;
    endcase
    if (pend) c = FE_IDLE;
  end
  assign cmd = c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; pend <= 1'b0; pc <= 1'b0; bi <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (st == S_IDLE) begin
        if (start) begin st <= S_INIT; pend <= 1'b0; pc <= 1'b0; end
      end else if (c.valid) begin
        pend <= 1'b1;
      end else if (pend && rsp.done) begin
        pend <= 1'b0;
        unique case (st)
          S_INIT: begin st <= S_POW; bi <= EB'(EMSB - 1); pc <= 1'b0; end
          S_POW: begin
            if (pc == 1'b0 && E[bi]) pc <= 1'b1;
            else begin
              pc <= 1'b0;
              if (bi == '0) st <= S_FIN; else bi <= bi - 1'b1;
            end
          end
          S_FIN: begin st <= S_IDLE; done <= 1'b1; end
          default: st <= S_IDLE;
        endcase
      end
    end
  end
endmodule
