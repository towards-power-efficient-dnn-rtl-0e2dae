// tb_static_vscale -- self-checking test of the static voltage estimate.
//
// Case 1 is the Artix-7 guard band of the results section: Vmin = 1.00 V,
// Vcrash = 0.95 V, n = 4, which must give Vs = 12.5 mV and the partition
// voltages 0.95625, 0.96875, 0.98125 and 0.99375 V (worked out by hand from
// the algorithm).  Case 2 spans 0.5 V .. 1.2 V (the 22/45 nm range of the
// paper's variant study): Vs = 175 mV and 0.5875, 0.7625, 0.9375, 1.1125 V.
// done must pulse exactly n + 2 cycles after start.
module tb_static_vscale;
  localparam int N = 4, VW = 24;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  logic [VW-1:0] v_min, v_crash, v_step;
  logic [N-1:0][VW-1:0] vccint;
  int checks = 0, failures = 0;

  static_vscale #(.NPART(N), .VOLT_W(VW)) dut (.clk, .rst_n, .start, .v_min,
    .v_crash, .busy, .done, .v_step, .vccint);

  initial forever #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic run(input int vmin, input int vcrash, input int vs,
                     input int e0, input int e1, input int e2, input int e3);
    int cyc;
    @(negedge clk);
    v_min = VW'(vmin); v_crash = VW'(vcrash); start = 1'b1;
    @(negedge clk) start = 1'b0;
    cyc = 1;
    while (!done && cyc < 50) begin @(negedge clk); cyc++; end
    check(cyc == N + 2, $sformatf("latency %0d cycles", cyc));
    check(v_step == VW'(vs), "stepping voltage Vs");
    check(vccint[0] == VW'(e0) && vccint[1] == VW'(e1) &&
          vccint[2] == VW'(e2) && vccint[3] == VW'(e3), "partition voltages");
    @(negedge clk);
    check(!done && !busy, "back to idle");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    run(1_000_000, 950_000, 12_500, 956_250, 968_750, 981_250, 993_750);
    run(1_200_000, 500_000, 175_000, 587_500, 762_500, 937_500, 1_112_500);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
