// part_fail_monitor -- builds the timing_fail-part-i flag of every partition.
//
// Each MAC's Razor flag is routed to the flag of the partition the MAC sits
// in (tpu_pkg::part_of: quadrants numbered top-left, top-right, bottom-left,
// bottom-right).  The paper states both "If any timing failure flag of any
// MAC placed in the i-th FPGA partition is high, the Vccint_i ... will be
// increased" and "Each timing_fail-part-i flag is ANDed value of all error
// detection flag all MACs placed in the i-th partition".  The two conflict;
// this design follows the first (OR) by default, which is what the voltage
// step needs, and offers the AND reading through the parameter AND_REDUCE.
//
// fail_now is the combinational reduction in the current cycle.  fail_seen
// is sticky: it remembers any failure since the last clear, so that a flag
// which pulses during a run is still visible when the runtime scheme takes
// its step at the end of the run (the window is this design's choice).
// clear has priority over new failures in the same cycle.
module part_fail_monitor #(
  parameter int unsigned ROWS       = tpu_pkg::ROWS,
  parameter int unsigned COLS       = tpu_pkg::COLS,
  parameter int unsigned PART_ROWS  = tpu_pkg::PART_ROWS,
  parameter int unsigned PART_COLS  = tpu_pkg::PART_COLS,
  parameter bit          AND_REDUCE = 1'b0
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              clear,
  input  logic [ROWS-1:0][COLS-1:0]         mac_err,
  output logic [PART_ROWS*PART_COLS-1:0]    fail_now,
  output logic [PART_ROWS*PART_COLS-1:0]    fail_seen
);

  localparam int unsigned NPART = PART_ROWS * PART_COLS;

  always_comb begin
    for (int p = 0; p < NPART; p++) fail_now[p] = AND_REDUCE;
    for (int i = 0; i < ROWS; i++) begin
      for (int j = 0; j < COLS; j++) begin
        if (AND_REDUCE)
          fail_now[tpu_pkg::part_of(i, j, ROWS, COLS, PART_ROWS, PART_COLS)] &= mac_err[i][j];
        else
          fail_now[tpu_pkg::part_of(i, j, ROWS, COLS, PART_ROWS, PART_COLS)] |= mac_err[i][j];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     fail_seen <= '0;
    else if (clear) fail_seen <= '0;
    else            fail_seen <= fail_seen | fail_now;
  end

endmodule
