// tb_csidh_ctrl: checks the CSIDH group-action controller on the toy-size
// datapath (fe_env.svh, p = 4*3*5*7*11*13*17 - 1) with EMAX = 2 and batches
// of three primes; random numbers come from the bench.  The results are
// compared with values from an independent model of the class-group action:
//   * keys e_A, e_B applied to A = 0 give the public keys 265791 and 90879;
//   * e_B applied to e_A's public key gives the shared curve 735488;
//   * per run: real isogenies = sum |e_i|, dummies = 6 * EMAX - real,
//     success = 1 and no fault, prng_load pulses with start;
//   * a curve that is not supersingular (A = 3) is rejected (success = 0).
module tb_csidh_ctrl;
  `include "fe_env.svh"
  localparam int NP = 6;
  localparam logic [LBITS-1:0] PR [NP] = '{10'd3, 10'd5, 10'd7, 10'd11, 10'd13, 10'd17};
  logic start = 0, busy, done, success, fault, prng_load;
  logic [W-1:0] a_in;
  logic signed [3:0] key [NP];
  fe_cmd_t ccmd;
  csidh_ctrl #(.NW(NW), .P(P), .NPRIMES(NP), .PRIMES(PR), .EMAX(2), .BATCH(3)) dut (
    .clk, .rst_n, .start, .a_in, .private_key(key), .busy, .done, .success, .fault,
    .prng_load, .cmd(ccmd), .rsp
  );
  assign cmd = ccmd;
  always_comb ext_in = a_in;

  initial begin
    repeat (10_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int loads = 0;
  always @(posedge clk) if (prng_load) loads++;

  task automatic run(input longint a, input int e [NP], input longint exp, input bit ok);
    int tot = 0, l0;
    for (int i = 0; i < NP; i++) begin
      key[i] = 4'(e[i]);
      tot += (e[i] < 0) ? -e[i] : e[i];
    end
    @(negedge clk);
    a_in = 64'(a); start = 1; l0 = loads;
    @(negedge clk) start = 0;
    while (!done) begin @(posedge clk); #1; end
    check("prng_load with start", loads == l0 + 1);
    if (ok) begin
      check($sformatf("result %0d", exp), u_rf.rf[R_OUT] == 64'(exp));
      check("success", success == 1'b1 && fault == 1'b0);
      check("real isogenies", int'(dut.real_cnt) == tot);
      check("dummy isogenies", int'(dut.dummy_cnt) == NP * 2 - tot);
    end else begin
      check("rejected", success == 1'b0);
    end
  endtask

  int ea [NP] = '{1, -2, 2, 0, -1, 2};
  int eb [NP] = '{-1, 2, 1, -2, 2, -2};
  int ez [NP] = '{0, 0, 0, 0, 0, 0};
  initial begin
    a_in = '0;
    for (int i = 0; i < NP; i++) key[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, ea, 265791, 1'b1);
    run(0, eb, 90879, 1'b1);
    run(265791, eb, 735488, 1'b1);
    run(3, ez, 0, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
