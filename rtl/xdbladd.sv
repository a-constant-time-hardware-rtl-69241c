// xdbladd: combined x-only doubling and differential addition on a Montgomery curve.
//
// Given P = (X1:Z1), Q = (X2:Z2), their difference D = (XD:ZD) in registers
// R_LDX / R_LDZ and the curve constants A24 = A + 2C and C24 = 4C, it
// overwrites P with [2]P and Q with P + Q.  The twenty field operations share
// (X1 +- Z1) and their squares between the doubling and the addition, so the
// pair costs 12 multiplications and 8 additions/subtractions:
//   t0 = X1+Z1, t1 = X1-Z1, X1 = t0^2, t2 = X2-Z2, X2 = X2+Z2, t0 = t0*t2,
//   Z1 = t1^2, t1 = t1*X2, t2 = X1-Z1, Z2 = Z1*C24, X1 = X1*Z2, X2 = A24*t2,
//   Z2 = Z2+X2, Z1 = t2*Z2, X2 = t0+t1, Z2 = t0-t1, X2 = X2^2, Z2 = Z2^2,
//   X2 = X2*ZD, Z2 = Z2*XD.
// Operations are issued one at a time to the register file, each waiting for
// the previous one's answer.
//
// Interface: start (one clock) with the four register addresses of P and Q,
// which must stay stable until done; done pulses when both results are
// written.  cmd / rsp connect to cu_regfile (cmd is all-zero when idle).
//
// The paper gives the function (simultaneous doubling and addition with
// shared intermediate values); the operation sequence, register use and the
// (A+2C : 4C) curve representation are this design's.
module xdbladd (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  csidh_pkg::raddr_t  px, pz, qx, qz,
  output logic               done,
  output csidh_pkg::fe_cmd_t cmd,
  input  csidh_pkg::fe_rsp_t rsp
);
  logic unused_zero;             // the zero flag is not needed here
  assign unused_zero = rsp.zero;
  import csidh_pkg::*;
  localparam int NOPS = 20;

  logic       run, pend;
  logic [4:0] pc;

  function automatic fe_cmd_t prog(input logic [4:0] idx, input raddr_t x1, z1, x2, z2);
    unique case (idx)
      5'd0:  return fe(FE_ADD, R_D0, x1, z1);
      5'd1:  return fe(FE_SUB, R_D1, x1, z1);
      5'd2:  return fe(FE_MUL, x1, R_D0, R_D0);
      5'd3:  return fe(FE_SUB, R_D2, x2, z2);
      5'd4:  return fe(FE_ADD, x2, x2, z2);
      5'd5:  return fe(FE_MUL, R_D0, R_D0, R_D2);
      5'd6:  return fe(FE_MUL, z1, R_D1, R_D1);
      5'd7:  return fe(FE_MUL, R_D1, R_D1, x2);
      5'd8:  return fe(FE_SUB, R_D2, x1, z1);
      5'd9:  return fe(FE_MUL, z2, z1, R_C24);
      5'd10: return fe(FE_MUL, x1, x1, z2);
      5'd11: return fe(FE_MUL, x2, R_A24, R_D2);
      5'd12: return fe(FE_ADD, z2, z2, x2);
      5'd13: return fe(FE_MUL, z1, R_D2, z2);
      5'd14: return fe(FE_ADD, x2, R_D0, R_D1);
      5'd15: return fe(FE_SUB, z2, R_D0, R_D1);
      5'd16: return fe(FE_MUL, x2, x2, x2);
      5'd17: return fe(FE_MUL, z2, z2, z2);
      5'd18: return fe(FE_MUL, x2, x2, R_LDZ);
      default: return fe(FE_MUL, z2, z2, R_LDX);
    endcase
  endfunction

  assign cmd = (run && !pend) ? prog(pc, px, pz, qx, qz) : FE_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; pend <= 1'b0; pc <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        run <= 1'b1; pend <= 1'b0; pc <= '0;
      end else if (cmd.valid) begin
        pend <= 1'b1;
      end else if (pend && rsp.done) begin
        pend <= 1'b0;
        if (pc == 5'(NOPS - 1)) begin
          run  <= 1'b0;
          done <= 1'b1;
        end else begin
          pc <= pc + 1'b1;
        end
      end
    end
  end
endmodule
