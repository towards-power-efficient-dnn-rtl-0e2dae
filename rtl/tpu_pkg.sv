// tpu_pkg -- types and constants shared by the voltage-scaled systolic TPU.
//
// The array is 16 x 16 MACs split into four 8 x 8 partitions, each fed from
// its own core supply Vccint_i (the paper's main example).  Supply voltages
// are carried as unsigned integers in microvolts so that the static scheme's
// arithmetic (e.g. 0.95 V + 12.5 mV / 2) stays exact.  The operand width n
// is not given by the paper; 8 bits is this design's choice, and the MAC
// output is 2n bits wide as drawn in the paper's MAC diagram (Y[2n-1:0]).
package tpu_pkg;

  // Array geometry (paper: 16 x 16 array, four 8 x 8 partitions)
  parameter int unsigned ROWS      = 16;
  parameter int unsigned COLS      = 16;
  parameter int unsigned PART_ROWS = 2;   // partitions stacked vertically
  parameter int unsigned PART_COLS = 2;   // partitions side by side
  parameter int unsigned NPART     = PART_ROWS * PART_COLS;

  // Datapath widths (n assumed 8; Y is 2n bits)
  parameter int unsigned DATA_W = 8;
  parameter int unsigned ACC_W  = 2 * DATA_W;

  // Supply voltages, microvolts
  parameter int unsigned VOLT_W = 24;     // up to 16.7 V, enough for 1.3 V
  typedef logic [VOLT_W-1:0] volt_t;

  // Artix-7 guard band from the results section: 0.95 V .. 1.00 V
  parameter volt_t V_NOM_UV   = VOLT_W'(1_000_000);
  parameter volt_t V_MIN_UV   = VOLT_W'(1_000_000);
  parameter volt_t V_CRASH_UV = VOLT_W'(950_000);

  // Partition that a MAC at (row, col) belongs to.  Partition 0 is the
  // top-left quadrant, 1 top-right, 2 bottom-left, 3 bottom-right, matching
  // partition-1 .. partition-4 of the paper.
  function automatic int unsigned part_of(int unsigned row, int unsigned col,
                                          int unsigned rows, int unsigned cols,
                                          int unsigned prows, int unsigned pcols);
    return (row / (rows / prows)) * pcols + (col / (cols / pcols));
  endfunction

endpackage
