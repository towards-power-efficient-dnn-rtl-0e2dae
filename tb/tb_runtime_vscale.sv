// tb_runtime_vscale -- self-checking test of the runtime calibration step.
//
// Loads the static estimate of the Artix-7 example, then applies 40 steps
// with random per-partition failure flags.  A reference model kept here
// adds or subtracts Vs = 12.5 mV per partition, refuses steps that would
// leave [0.95 V, 1.00 V], and counts the net steps C_i.  Steps both ways and
// refusals at both limits must each happen at least once.
module tb_runtime_vscale;
  localparam int N = 4, VW = 24, CW = 8;
  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0, step = 1'b0;
  logic [N-1:0][VW-1:0] v_init, vccint;
  logic [VW-1:0] v_step, v_lo, v_hi;
  logic [N-1:0] fail = '0, at_limit;
  logic [N-1:0][CW-1:0] c_steps;
  int checks = 0, failures = 0, ups = 0, downs = 0, lim_hi = 0, lim_lo = 0;

  runtime_vscale #(.NPART(N), .VOLT_W(VW), .CNT_W(CW)) dut (.clk, .rst_n, .load,
    .v_init, .v_step, .v_lo, .v_hi, .step, .fail, .vccint, .c_steps, .at_limit);

  initial forever #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    int ev [N];
    int ec [N];
    v_init = {VW'(993_750), VW'(981_250), VW'(968_750), VW'(956_250)};
    v_step = VW'(12_500); v_lo = VW'(950_000); v_hi = VW'(1_000_000);
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    @(negedge clk) load = 1'b1;
    @(negedge clk) load = 1'b0;
    for (int i = 0; i < N; i++) begin ev[i] = int'(v_init[i]); ec[i] = 0; end
    for (int i = 0; i < N; i++) check(vccint[i] == VW'(ev[i]) && c_steps[i] == 0, "load");
    for (int n = 0; n < 40; n++) begin
      // partition i fails with a bias that drifts: low partitions fail more
      for (int i = 0; i < N; i++) fail[i] = ($urandom_range(0, 9) < (n < 20 ? 8 - 2*i : 2 + 2*i));
      step = 1'b1;
      @(negedge clk) step = 1'b0;
      for (int i = 0; i < N; i++) begin
        if (fail[i]) begin
          if (ev[i] + 12_500 <= 1_000_000) begin ev[i] += 12_500; ec[i]++; ups++; end
          else lim_hi++;
        end else begin
          if (ev[i] - 12_500 >= 950_000) begin ev[i] -= 12_500; ec[i]--; downs++; end
          else lim_lo++;
        end
        check(vccint[i] == VW'(ev[i]), $sformatf("Vccint_%0d", i));
        check($signed(c_steps[i]) == CW'(ec[i]), $sformatf("C_%0d", i));
      end
      @(negedge clk);   // an idle cycle must not move anything
      for (int i = 0; i < N; i++) check(vccint[i] == VW'(ev[i]), "hold without step");
    end
    check(ups > 0 && downs > 0 && lim_hi > 0 && lim_lo > 0, "all step kinds exercised");
    $display("ups=%0d downs=%0d refused_hi=%0d refused_lo=%0d", ups, downs, lim_hi, lim_lo);
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
