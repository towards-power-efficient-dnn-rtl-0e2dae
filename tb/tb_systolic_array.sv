// tb_systolic_array -- self-checking test of the 16 x 16 Razor MAC array.
//
// The testbench skews the operands itself (activation column j delayed by
// j cycles, weight row i by i cycles), streams K = 20 random vectors, and
// compares every accumulator with P[i][j] = sum_k W[i][k] * X[k][j]
// computed here.  It then injects one late result into a MAC of the
// bottom-right quadrant and checks that exactly that MAC's err rises, and
// that a clear clears it again.
module tb_systolic_array;
  localparam int R = 16, C = 16, DW = 8, AW = 16, K = 20;
  logic clk = 1'b0, dclk = 1'b0, rst_n = 1'b0, clr = 1'b0;
  logic [C-1:0][DW-1:0] act_top;
  logic [R-1:0][DW-1:0] wgt_left;
  logic [R-1:0][C-1:0][AW-1:0] y;
  logic [R-1:0][C-1:0] err;
  int checks = 0, failures = 0;

  logic [DW-1:0] W [R][K];
  logic [DW-1:0] X [K][C];
  logic [AW-1:0] P [R][C];

  systolic_array #(.ROWS(R), .COLS(C), .DATA_W(DW), .ACC_W(AW)) dut (
    .clk, .dclk, .rst_n, .clr, .act_top, .wgt_left, .y, .err);

  initial forever #5 clk = ~clk;
  initial begin #3; forever #5 dclk = ~dclk; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    int bad;
    act_top = '0; wgt_left = '0;
    for (int i = 0; i < R; i++) for (int k = 0; k < K; k++) W[i][k] = DW'($urandom);
    for (int k = 0; k < K; k++) for (int j = 0; j < C; j++) X[k][j] = DW'($urandom);
    for (int i = 0; i < R; i++) for (int j = 0; j < C; j++) begin
      P[i][j] = '0;
      for (int k = 0; k < K; k++) P[i][j] += AW'(W[i][k]) * AW'(X[k][j]);
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    @(negedge clk) clr = 1'b1;
    @(negedge clk) clr = 1'b0;
    // cycle t: column j receives X[t-j][j], row i receives W[i][t-i]
    for (int t = 0; t < K + R + C; t++) begin
      for (int j = 0; j < C; j++) act_top[j]  = (t - j >= 0 && t - j < K) ? X[t-j][j] : '0;
      for (int i = 0; i < R; i++) wgt_left[i] = (t - i >= 0 && t - i < K) ? W[i][t-i] : '0;
      @(negedge clk);
    end
    act_top = '0; wgt_left = '0;
    repeat (R + C) @(negedge clk);
    bad = 0;
    for (int i = 0; i < R; i++) for (int j = 0; j < C; j++) begin
      check(y[i][j] == P[i][j], $sformatf("P[%0d][%0d]", i, j));
    end
    check(err == '0, "no Razor flag without late data");
    // late result in MAC (12,9): force its main register to a stale value
    @(posedge clk);
    #1 force dut.GEN_REG_I[12].GEN_REG_J[9].uut.u_acc.r_q = P[12][9] + 16'd1;
    #1 release dut.GEN_REG_I[12].GEN_REG_J[9].uut.u_acc.r_q;
    @(negedge clk);
    @(negedge clk);
    for (int i = 0; i < R; i++) for (int j = 0; j < C; j++)
      if (err[i][j] != (i == 12 && j == 9)) bad++;
    check(bad == 0, "only the disturbed MAC flags an error");
    clr = 1'b1;
    @(negedge clk) clr = 1'b0;
    @(negedge clk);
    @(negedge clk);
    check(err == '0, "clear removes the flag");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
