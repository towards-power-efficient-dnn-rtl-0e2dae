// tb_tpu_workloads -- the evaluated array configurations, one trial run each.
//
// Runs tpu_top, through tpu_workload_run, at three of the configurations for
// which the source reports power:
//   * 32 x 32 array in four 16 x 16 partitions, guard band 0.95 .. 1.00 V;
//   * 64 x 64 array in four 32 x 32 partitions, with Vcrash 0.65 V and Vmin
//     1.05 V so that Algorithm 1 lands on 0.7 / 0.8 / 0.9 / 1.0 V, the
//     voltages of the low-voltage 64 x 64 case (0.1 V supply step);
//   * a two-partition grid with 0.5 / 0.6 V (Vcrash 0.45 V, Vmin 0.65 V), as
//     in the 2 x (32 x 64) {0.5, 0.6} variant of the partition study, here on
//     a 32 x 32 array (two 16 x 32 partitions) to keep the build short; the
//     partition logic is the same at 64 x 64.
// Each run checks the static voltages, a full matrix multiply, the Razor
// flag of the disturbed partition and the runtime step.
module tb_tpu_workloads;
  logic f0, f1, f2;
  int c0, c1, c2, e0, e1, e2;

  tpu_workload_run #(.ROWS(32), .COLS(32), .PART_ROWS(2), .PART_COLS(2), .K(8),
                     .INJ_I(20), .INJ_J(5)) u_32 (.finished(f0), .checks(c0), .failures(e0));
  tpu_workload_run #(.ROWS(64), .COLS(64), .PART_ROWS(2), .PART_COLS(2), .K(8),
                     .INJ_I(10), .INJ_J(50), .VCRASH(650_000), .VMIN(1_050_000),
                     .VNOM(1_050_000)) u_64 (.finished(f1), .checks(c1), .failures(e1));
  tpu_workload_run #(.ROWS(32), .COLS(32), .PART_ROWS(2), .PART_COLS(1), .K(8),
                     .INJ_I(20), .INJ_J(31), .VCRASH(450_000), .VMIN(650_000),
                     .VNOM(1_200_000)) u_64x2 (.finished(f2), .checks(c2), .failures(e2));

  initial begin
    wait (f0 && f1 && f2);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, e0 + e1 + e2);
    $finish;
  end

  initial begin
    #200000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, e0 + e1 + e2 + 1);
    $finish;
  end
endmodule
