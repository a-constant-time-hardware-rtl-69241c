// tb_cu_regfile: checks the register file and command sequencer on the
// toy-size datapath (fe_env.svh): the constant registers (0, Montgomery 1,
// R^2, plain 1), LDIN and RND writes answered one clock later, ADD, SUB and
// MUL through the ALU with results and zero flag compared with a model of
// the register contents, out_value mirroring R_OUT, and the response
// latency (ALU ADD / SUB 5 clocks, direct writes 1 clock).
module tb_cu_regfile;
  `include "fe_env.svh"

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial cmd = FE_IDLE;
  longint model [NREG];
  int lat;

  task automatic issue(input fe_op_e op, input raddr_t d, input raddr_t a, input raddr_t b,
                       output logic z);
    int t0;
    @(negedge clk);
    cmd = fe(op, d, a, b); t0 = cyc;
    @(negedge clk) cmd = FE_IDLE;
    while (!rsp.done) begin @(posedge clk); #1; end
    z = rsp.zero;
    lat = cyc - t0;
    @(posedge clk); #1;                   // the write lands with this edge
  endtask

  logic z;
  longint e;
  raddr_t d, a, b;
  fe_op_e op;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    check("constant 0", getr(C_ZERO) == 0 && u_rf.rd(C_ZERO) == '0);
    check("constant Montgomery 1", getr(C_ONE) == 1);
    check("constant R^2", u_rf.rd(C_R2) == R2);
    check("constant plain 1", u_rf.rd(C_RAW1) == 64'd1);
    model[C_ZERO] = 0; model[C_ONE] = 1; model[C_R2] = from_m(R2); model[C_RAW1] = from_m(64'd1);
    for (int r = 4; r < NREG; r++) begin model[r] = rndm(); setr(raddr_t'(r), model[r]); end

    ext_in = 64'h12345;
    issue(FE_LDIN, R_T0, C_ZERO, C_ZERO, z);
    check("LDIN value", u_rf.rf[R_T0] == 64'h12345);
    check("LDIN answered after 1 clock", lat == 1);
    model[R_T0] = from_m(64'h12345);
    issue(FE_RND, R_T1, C_ZERO, C_ZERO, z);
    check("RND value below p", u_rf.rf[R_T1] < P);
    model[R_T1] = getr(R_T1);

    for (int i = 0; i < 150; i++) begin
      op = fe_op_e'($urandom_range(0, 2));
      d = raddr_t'($urandom_range(4, NREG - 1));
      a = raddr_t'($urandom_range(0, NREG - 1));
      b = (i % 10 == 0) ? a : raddr_t'($urandom_range(0, NREG - 1));
      issue(op, d, a, b, z);
      case (op)
        FE_ADD: e = addm(model[a], model[b]);
        FE_SUB: e = subm(model[a], model[b]);
        default: e = mulm(model[a], model[b]);
      endcase
      model[d] = e;
      check($sformatf("op %0d value", op), getr(d) == e);
      check("zero flag", z == (e == 0));
      if (op != FE_MUL) check("ADD/SUB latency 5", lat == 5);
    end
    issue(FE_ADD, R_OUT, R_T0, C_ZERO, z);
    check("out_value mirrors R_OUT", out_value == u_rf.rf[R_OUT]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
