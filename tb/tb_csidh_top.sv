// tb_csidh_top: end-to-end test of the co-processor at a toy size that keeps
// the simulation short: p = 4*3*5*7*11*13*17 - 1 = 1021019 (20 bits, two
// 32-bit words, R = 2^64), EMAX = 2, BATCH = 2 so that several rounds and both
// twist phases are needed.  The expected curves were computed with an
// independent variable-time model of the class-group action (affine
// Montgomery arithmetic, Velu/Costello-Hisil formulas) and are constants here.
//
// Runs and checks:
//   1. Alice and Bob public keys from A = 0, compared with the model.
//   2. Both shared secrets; they must match each other and the model.
//   3. Per successful run: real isogenies = sum |e_i|, dummy isogenies =
//      NPRIMES*EMAX - real, success = 1, no fault.
//   4. Rejected inputs: A = 2, A = p - 2, A = p -> success = 0.
//   5. Ordinary curve A = 3 with a zero key -> [p+1]P validation fails.
//      (The per-isogeny [l]K checks also trip there.)
//   6. A window register of xisog is corrupted in the middle of a run -> the
//      [l]K check raises fault and success = 0.
//   7. The same design with MUL_CYC = 2 (Booth multipliers), MASK = 0 and
//      batches of 3 computes Alice's public key again.
// Mechanism counters (real and dummy isogenies, isogenies in the twist phase,
// point retries, kernels at infinity, validation failure, fault detection)
// must each have happened at least once.
module tb_csidh_top;
  import csidh_pkg::*;
  localparam int NW = 2, W = 64, NP = 6;
  localparam logic [W-1:0] P    = 64'hf945b;
  localparam logic [W-1:0] PINV = 64'he393e804e98c842d;
  localparam logic [W-1:0] R2   = 64'ha106f;
  localparam logic [W-1:0] MONE = 64'hf534d;
  localparam logic [LBITS-1:0] PR [NP] = '{10'd3, 10'd5, 10'd7, 10'd11, 10'd13, 10'd17};
  localparam int EMAX = 2;

  localparam logic [W-1:0] EXP_A = 64'd265791, EXP_B = 64'd90879, EXP_S = 64'd735488;

  logic clk = 0, rst_n = 0, start = 0;
  logic [W-1:0] a_in = '0, a_out;
  logic signed [3:0] key [NP];
  logic [63:0] seed = 64'h1;
  logic busy, done, success, fault;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  csidh_top #(
    .NW(NW), .P(P), .PINV(PINV), .R2(R2), .MONE(MONE), .NPRIMES(NP), .PRIMES(PR),
    .EMAX(EMAX), .BATCH(2)
  ) dut (.clk, .rst_n, .start, .a_in, .private_key(key), .seed, .a_out, .busy, .done,
         .success, .fault);

  // second instance in the ASIC configuration: two-cycle Booth multipliers,
  // no ALU masking
  logic start2 = 0, busy2, done2, success2, fault2;
  logic [W-1:0] a_out2;
  csidh_top #(
    .NW(NW), .P(P), .PINV(PINV), .R2(R2), .MONE(MONE), .NPRIMES(NP), .PRIMES(PR),
    .EMAX(EMAX), .BATCH(3), .MUL_CYC(2), .MASK(1'b0)
  ) dut2 (.clk, .rst_n, .start(start2), .a_in, .private_key(key), .seed, .a_out(a_out2),
          .busy(busy2), .done(done2), .success(success2), .fault(fault2));

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_real = 0, n_dummy = 0, n_twist = 0, n_retry = 0, n_skip = 0, n_val = 0, n_fault = 0;
  logic [31:0] prev_real = '0;
  always @(posedge clk) begin
    if (dut.u_ctrl.real_cnt > prev_real && dut.u_ctrl.tw) n_twist++;
    prev_real <= dut.u_ctrl.real_cnt;
  end

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input logic [W-1:0] a, input int e [NP], input logic [63:0] s);
    int t0;
    @(negedge clk);
    a_in = a; seed = s;
    for (int i = 0; i < NP; i++) key[i] = 4'(e[i]);
    start = 1;
    @(negedge clk) start = 0;
    t0 = 0;
    while (!done) begin @(posedge clk); #1; t0++; end
    n_real  += int'(dut.u_ctrl.real_cnt);
    n_dummy += int'(dut.u_ctrl.dummy_cnt);
    n_retry += int'(dut.u_ctrl.retry_cnt);
    n_skip  += int'(dut.u_ctrl.skip_cnt);
    $display("run A=%0d -> %0d success=%0d fault=%0d cycles=%0d real=%0d dummy=%0d retry=%0d skip=%0d",
             a, a_out, success, fault, t0, dut.u_ctrl.real_cnt, dut.u_ctrl.dummy_cnt,
             dut.u_ctrl.retry_cnt, dut.u_ctrl.skip_cnt);
  endtask

  task automatic check_counts(input int e [NP]);
    int tot = 0;
    for (int i = 0; i < NP; i++) tot += (e[i] < 0) ? -e[i] : e[i];
    check("real isogeny count", int'(dut.u_ctrl.real_cnt) == tot);
    check("dummy isogeny count", int'(dut.u_ctrl.dummy_cnt) == NP * EMAX - tot);
    check("success", success === 1'b1);
    check("no fault", fault === 1'b0);
  endtask

  int ea [NP] = '{1, -2, 2, 0, -1, 2};
  int eb [NP] = '{-1, 2, 1, -2, 2, -2};
  int ez [NP] = '{0, 0, 0, 0, 0, 0};
  logic [W-1:0] pub_a, pub_b, sh_a, sh_b;
  bit injected;

  initial begin
    for (int i = 0; i < NP; i++) key[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    run(64'd0, ea, 64'h1234_5678_9abc_def0); pub_a = a_out;
    check("Alice public key", a_out == EXP_A); check_counts(ea);
    run(64'd0, eb, 64'h0fed_cba9_8765_4321); pub_b = a_out;
    check("Bob public key", a_out == EXP_B); check_counts(eb);
    run(pub_b, ea, 64'h5555_aaaa_1111_2222); sh_a = a_out; check_counts(ea);
    run(pub_a, eb, 64'h7777_3333_9999_0000); sh_b = a_out; check_counts(eb);
    check("shared secrets agree", sh_a == sh_b);
    check("shared secret matches model", sh_a == EXP_S);
    // same key, other seed: same public key
    run(64'd0, ea, 64'h0000_0000_dead_beef);
    check("public key independent of seed", a_out == EXP_A); check_counts(ea);

    // rejected inputs
    run(64'd2, ez, 64'h42);      check("A = 2 rejected", success === 1'b0);
    run(P - 64'd2, ez, 64'h43);  check("A = -2 rejected", success === 1'b0);
    run(P, ez, 64'h44);          check("A = p rejected", success === 1'b0);

    // ordinary curve: validation must fail
    run(64'd3, ez, 64'h45);
    check("ordinary curve rejected", success === 1'b0);
    // the isogeny [l]K checks also fire here: random kernels on an ordinary
    // curve do not have order l
    check("rejected by validation", dut.u_ctrl.val_ok === 1'b0);
    if (dut.u_ctrl.val_ok === 1'b0) n_val++;

    // fault injection: corrupt the sliding window while xisog builds multiples
    injected = 0;
    fork
      run(64'd0, ea, 64'h46);
      begin
        wait (dut.u_ctrl.u_xisog.st == 3'd3 && dut.u_ctrl.u_xisog.pc == 4'd7);
        @(negedge clk);
        dut.u_rf.rf[R_W0X] = dut.u_rf.rf[R_W0X] + 64'd1;
        dut.u_rf.rf[R_W1X] = dut.u_rf.rf[R_W1X] + 64'd1;
        dut.u_rf.rf[R_W2X] = dut.u_rf.rf[R_W2X] + 64'd1;
        injected = 1;
      end
    join
    check("fault injected", injected);
    check("fault detected", fault === 1'b1);
    check("faulty run not successful", success === 1'b0);
    if (fault === 1'b1) n_fault++;

    // afterwards the unit works again
    run(64'd0, eb, 64'h47);
    check("recovery after fault", a_out == EXP_B && success === 1'b1);

    // ASIC configuration
    @(negedge clk);
    a_in = '0; seed = 64'h99;
    for (int i = 0; i < NP; i++) key[i] = 4'(ea[i]);
    start2 = 1;
    @(negedge clk) start2 = 0;
    while (!done2) begin @(posedge clk); #1; end
    check("ASIC configuration: Alice public key", a_out2 == EXP_A && success2 === 1'b1);

    $display("mechanisms: real=%0d dummy=%0d twist=%0d retry=%0d skip=%0d validation=%0d fault=%0d",
             n_real, n_dummy, n_twist, n_retry, n_skip, n_val, n_fault);
    check("real isogenies happened", n_real > 0);
    check("dummy isogenies happened", n_dummy > 0);
    check("twist-phase isogenies happened", n_twist > 0);
    check("point retries happened", n_retry > 0);
    check("kernel at infinity happened", n_skip > 0);
    check("validation failure happened", n_val > 0);
    check("fault detection happened", n_fault > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
