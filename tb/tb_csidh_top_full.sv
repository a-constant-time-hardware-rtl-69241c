// tb_csidh_top_full: one complete CSIDH-512 key generation on the
// co-processor at its full size (no parameter overrides): 74 primes, EMAX = 5,
// batches of 16, 512-bit field.  The key is fixed and the expected public key
// was computed beforehand with an independent, variable-time model of the
// class-group action; the group action does not depend on the random points,
// so the result must match exactly.
//
// Checks, in order:
//   * input rejection: A = p, A = 2 and A = p - 2 end quickly with success = 0;
//   * loading: A24 = A + 2 and C24 = 4 in Montgomery form (compared with
//     wide arithmetic in the bench);
//   * the first batch is the 16 lowest primes (all have e >= 0); its first
//     (highest) prime has e = 0 and the next e = +1, so a dummy and then a
//     real isogeny are committed first.  The dummy must leave the curve
//     unchanged, the real one must change it, and neither may report a fault;
//   * at the end: success, no fault, real isogenies = sum |e_i|, dummy
//     isogenies = 74 * 5 - real, and the public key equals the model's.
module tb_csidh_top_full;
  import csidh_pkg::*;
  localparam int W = 512, NP = NPRIMES512;
  localparam logic [4:0] ST_ROUND = 5'd2;   // state code of csidh_ctrl S_ROUND
  localparam logic [W-1:0] EXP_PUB =
    512'h2c5f34746ec8cb3b5d930672b6f0e781ff2adb7f17e31558c8ac64f7d116427088b526bcf5965a365118cad9649d8a2ec7b9e4424fe0405d0597bbf461d146c5;

  logic clk = 0, rst_n = 0, start = 0;
  logic [W-1:0] a_in = '0, a_out;
  logic signed [3:0] key [NP];
  logic [63:0] seed = 64'h1;
  logic busy, done, success, fault;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  csidh_top dut (.clk, .rst_n, .start, .a_in, .private_key(key), .seed, .a_out, .busy,
                 .done, .success, .fault);

  int cyc = 0;
  always @(posedge clk) cyc++;
  initial begin
    repeat (400_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // x * 2^512 mod p: the Montgomery form the register file holds
  function automatic logic [W-1:0] mont(input logic [W-1:0] x);
    logic [2*W-1:0] t;
    t = {x, {W{1'b0}}};
    return W'(t % {{W{1'b0}}, P512});
  endfunction

  function automatic int sum_abs();
    sum_abs = 0;
    for (int i = 0; i < NP; i++) sum_abs += (key[i] < 0) ? -int'(key[i]) : int'(key[i]);
  endfunction

  task automatic go(input logic [W-1:0] a, input logic [63:0] s);
    @(negedge clk);
    a_in = a; seed = s; start = 1;
    @(negedge clk) start = 0;
  endtask

  task automatic wait_done();
    while (!done) begin @(posedge clk); #1; end
  endtask

  logic [W-1:0] a24_0, c24_0;
  int t0;

  initial begin
    // fixed key; the 16 lowest primes have e >= 0 so that they form the first batch
    for (int i = 0; i < NP; i++)
      key[i] = (i < 16) ? 4'((i * 3 + 1) % 6) : 4'(((i * 7 + 3) % 11) - 5);
    key[15] = 4'sd0;      // first prime handled in the first batch: dummy only
    key[14] = 4'sd1;      // next one: a real isogeny first
    repeat (3) @(posedge clk);
    rst_n = 1;

    go(P512, 64'h11); wait_done();
    check("A = p rejected", success === 1'b0);
    go(512'd2, 64'h12); wait_done();
    check("A = 2 rejected", success === 1'b0);
    go(P512 - 512'd2, 64'h13); wait_done();
    check("A = -2 rejected", success === 1'b0);

    go(512'd0, 64'h1234_5678);
    t0 = cyc;
    wait (dut.u_ctrl.st == ST_ROUND);
    a24_0 = dut.u_rf.rf[R_A24];
    c24_0 = dut.u_rf.rf[R_C24];
    check("A24 = A + 2 (Montgomery form)", a24_0 == mont(512'd2));
    check("C24 = 4 (Montgomery form)", c24_0 == mont(512'd4));
    @(posedge clk); #1;
    check("first batch = 16 lowest primes", dut.u_ctrl.bm[15:0] == 16'hffff && dut.u_ctrl.bm[NP-1:16] == '0);

    wait (dut.u_ctrl.dummy_cnt + dut.u_ctrl.real_cnt + dut.u_ctrl.skip_cnt != 0);
    @(posedge clk); #1;
    $display("first step after %0d clocks: real=%0d dummy=%0d skip=%0d retry=%0d",
             cyc - t0, dut.u_ctrl.real_cnt, dut.u_ctrl.dummy_cnt, dut.u_ctrl.skip_cnt,
             dut.u_ctrl.retry_cnt);
    if (dut.u_ctrl.dummy_cnt == 1) begin
      check("dummy isogeny leaves A24", dut.u_rf.rf[R_A24] == a24_0);
      check("dummy isogeny leaves C24", dut.u_rf.rf[R_C24] == c24_0);
    end
    check("first step is a dummy or a skipped kernel",
          dut.u_ctrl.dummy_cnt == 1 || dut.u_ctrl.skip_cnt == 1);
    check("no fault after the first step", dut.u_ctrl.fault === 1'b0);

    wait (dut.u_ctrl.real_cnt != 0 || dut.u_ctrl.st == ST_ROUND);
    @(posedge clk); #1;
    $display("after %0d clocks: real=%0d dummy=%0d skip=%0d retry=%0d", cyc - t0,
             dut.u_ctrl.real_cnt, dut.u_ctrl.dummy_cnt, dut.u_ctrl.skip_cnt, dut.u_ctrl.retry_cnt);
    if (dut.u_ctrl.real_cnt == 1) begin
      check("real isogeny changed the curve",
            dut.u_rf.rf[R_A24] != a24_0 || dut.u_rf.rf[R_C24] != c24_0);
      check("e of the real prime moved to 0", dut.u_ctrl.e_rem[14] == 4'sd0);
      check("the real prime owes EMAX - 1", dut.u_ctrl.cnt[14] == 3'd4);
    end
    check("no fault after the real isogeny", dut.u_ctrl.fault === 1'b0);

    // let the key generation finish
    wait_done();
    $display("finished after %0d clocks: real=%0d dummy=%0d skip=%0d retry=%0d", cyc - t0,
             dut.u_ctrl.real_cnt, dut.u_ctrl.dummy_cnt, dut.u_ctrl.skip_cnt, dut.u_ctrl.retry_cnt);
    check("success", success === 1'b1 && fault === 1'b0);
    check("real isogenies = sum |e_i|", dut.u_ctrl.real_cnt == 32'(sum_abs()));
    check("dummy isogenies = 74 * 5 - real", dut.u_ctrl.dummy_cnt == 32'(NP * 5 - sum_abs()));
    check("public key matches the model", a_out == EXP_PUB);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
