// tb_alu: checks the masked ALU.  Random ADD, SUB and MUL commands on
// 512-bit field elements are compared with wide-arithmetic references
// (for MUL: r * 2^512 = a * b mod p), the zero flag is checked on results that
// must be zero, and the latencies (ADD/SUB 5 clocks, MUL 72)
// are checked.  Masking is checked too: while an ADD runs the multiplier must
// be busy with a dummy product, and between commands the adder pipeline must
// keep changing.
module tb_alu;
  import csidh_pkg::*;
  localparam int NW = 16, W = 32 * NW;
  localparam logic [W-1:0] P = P512;
  logic clk = 0, rst_n = 0, start = 0;
  alu_op_e op = ALU_ADD;
  logic [W-1:0] a = '0, b = '0, rnd, result;
  logic done, zero;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  // random words for masking
  always @(posedge clk) for (int i = 0; i < NW; i++) rnd[32*i +: 32] <= $urandom;

  alu #(.NW(NW), .MUL_CYC(1), .MASK(1'b1), .P(P), .PINV(PINV512)) dut (.*);

  function automatic logic [W-1:0] rndp();
    logic [W:0] v;
    for (int i = 0; i < W/32; i++) v[32*i +: 32] = $urandom;
    v[W] = 1'b0;
    return W'(v % {1'b0, P});
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc++;

  int dummy_seen = 0, toggles = 0;
  logic [W-1:0] prev_add;
  always @(posedge clk) begin
    if (dut.u_mul.busy && !dut.mm_real) dummy_seen++;
    if (dut.u_add.sum != prev_add) toggles++;
    prev_add <= dut.u_add.sum;
  end

  task automatic run(input alu_op_e o, input logic [W-1:0] x, input logic [W-1:0] y);
    int t0, lat;
    logic [2*W+1:0] e, got;
    @(negedge clk);
    op = o; a = x; b = y; start = 1; t0 = cyc;
    @(negedge clk) start = 0;
    do begin @(posedge clk); #1; end while (!done);
    lat = cyc - t0;
    case (o)
      ALU_ADD: begin e = ({(W+2)'(x)} + y) % P; got = result; end
      ALU_SUB: begin e = ({(W+2)'(x)} + P - y) % P; got = result; end
      default: begin e = ({(2*W+2)'(x)} * y) % P; got = ({(2*W+2)'(result)} << W) % P; end
    endcase
    checks += 3;
    if (got !== e) begin failures++; $display("op %s wrong", o.name()); end
    if (zero !== (result == '0)) begin failures++; $display("zero flag wrong"); end
    if (lat != ((o == ALU_MUL) ? 72 : 5)) begin failures++; $display("op %s latency %0d", o.name(), lat); end
  endtask

  initial begin
    logic [W-1:0] x;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (30) @(posedge clk);
    x = rndp();
    run(ALU_SUB, x, x);
    checks++; if (!zero) begin failures++; $display("x - x not flagged zero"); end
    run(ALU_ADD, x, P - x);
    checks++; if (!zero) begin failures++; $display("x + (p - x) not flagged zero"); end
    run(ALU_MUL, '0, x);
    checks++; if (!zero) begin failures++; $display("0 * x not flagged zero"); end
    for (int n = 0; n < 60; n++) begin
      alu_op_e o;
      o = alu_op_e'(n % 3);
      run(o, rndp(), rndp());
    end
    checks += 2;
    if (dummy_seen < 100) begin failures++; $display("multiplier idle without masking (%0d)", dummy_seen); end
    if (toggles < cyc / 2) begin failures++; $display("adder idle without masking (%0d of %0d)", toggles, cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
