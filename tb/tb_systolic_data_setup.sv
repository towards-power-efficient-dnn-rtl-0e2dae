// tb_systolic_data_setup -- self-checking test of the operand skew.
//
// A fresh random vector is applied every cycle; the testbench keeps the
// history of inputs and checks that output lane k always equals what lane k
// received k cycles earlier (lane 0 in the same cycle).
module tb_systolic_data_setup;
  localparam int L = 16, DW = 8, T = 200;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [L-1:0][DW-1:0] in_vec = '0, out_vec;
  logic [L-1:0][DW-1:0] hist [T];
  int checks = 0, failures = 0;

  systolic_data_setup #(.LANES(L), .DATA_W(DW)) dut (.clk, .rst_n, .in_vec, .out_vec);

  initial forever #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < T; t++) begin
      @(negedge clk);
      for (int k = 0; k < L; k++) in_vec[k] = DW'($urandom);
      hist[t] = in_vec;
      #1;
      for (int k = 0; k < L; k++) begin
        if (t >= k) check(out_vec[k] == hist[t-k][k], $sformatf("lane %0d", k));
        else        check(out_vec[k] == '0, $sformatf("lane %0d after reset", k));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
