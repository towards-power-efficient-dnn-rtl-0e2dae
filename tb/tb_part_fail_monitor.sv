// tb_part_fail_monitor -- self-checking test of the partition fail flags.
//
// Random sparse MAC error patterns are applied to the 16 x 16 monitor.  The
// expected flag of each quadrant (0 top-left, 1 top-right, 2 bottom-left,
// 3 bottom-right, 8 x 8 each) is computed here by plain index tests; the
// sticky flags must accumulate every failure since the last clear, and a
// clear must win over a failure in the same cycle.  A second instance with
// AND_REDUCE set must flag a quadrant only when all 64 of its MACs flag.
module tb_part_fail_monitor;
  localparam int R = 16, C = 16;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0;
  logic [R-1:0][C-1:0] mac_err = '0;
  logic [3:0] fail_now, fail_seen, exp_now, exp_seen;
  logic [3:0] and_now, and_seen, exp_and;
  int checks = 0, failures = 0;

  part_fail_monitor #(.ROWS(R), .COLS(C), .PART_ROWS(2), .PART_COLS(2)) dut (
    .clk, .rst_n, .clear, .mac_err, .fail_now, .fail_seen);

  // the AND reading: a partition flags only when all of its MACs flag
  part_fail_monitor #(.ROWS(R), .COLS(C), .PART_ROWS(2), .PART_COLS(2), .AND_REDUCE(1'b1)) dut_and (
    .clk, .rst_n, .clear, .mac_err, .fail_now(and_now), .fail_seen(and_seen));

  initial forever #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    exp_seen = '0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      mac_err = '0;
      // 0..2 random flags
      for (int e = 0; e < $urandom_range(0, 2); e++)
        mac_err[$urandom_range(0, R-1)][$urandom_range(0, C-1)] = 1'b1;
      clear = ($urandom_range(0, 15) == 0);
      exp_now = '0;
      for (int i = 0; i < R; i++) for (int j = 0; j < C; j++)
        if (mac_err[i][j]) begin
          if (i < 8 && j < 8) exp_now[0] = 1'b1;
          else if (i < 8)     exp_now[1] = 1'b1;
          else if (j < 8)     exp_now[2] = 1'b1;
          else                exp_now[3] = 1'b1;
        end
      // every 8th cycle: fill one whole quadrant, so the AND reading fires
      if (n % 8 == 7) begin
        int q;
        q = $urandom_range(0, 3);
        for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++)
          mac_err[(q / 2) * 8 + i][(q % 2) * 8 + j] = 1'b1;
        exp_now[q] = 1'b1;
      end
      exp_and = '0;
      for (int q = 0; q < 4; q++) begin
        exp_and[q] = 1'b1;
        for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++)
          if (!mac_err[(q / 2) * 8 + i][(q % 2) * 8 + j]) exp_and[q] = 1'b0;
      end
      #1 check(fail_now == exp_now, "combinational partition flags");
      check(and_now == exp_and, "AND-reduced partition flags");
      @(posedge clk);
      exp_seen = clear ? '0 : (exp_seen | exp_now);
      #1 check(fail_seen == exp_seen, "sticky partition flags");
    end
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
