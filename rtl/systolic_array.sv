// systolic_array -- ROWS x COLS grid of Razor-checked MACs (output stationary).
//
// Activations enter at the top of each column and move one cell down per
// clk; weights enter at the left of each row and move one cell right per
// clk.  The direction of the activation flow follows the paper's timing
// report, whose worst paths run from the prev_activ register of cell
// GEN_REG_I[0].GEN_REG_J[1] into the output register of cell
// GEN_REG_I[1].GEN_REG_J[1]; the generate loops keep those names.  Each
// cell keeps its own sum, so with skewed inputs (see systolic_data_setup)
// cell (i,j) ends up holding sum_k W[i][k] * X[k][j].
//
// The grid is split into PART_ROWS x PART_COLS equal partitions (paper: four
// 8 x 8 partitions of a 16 x 16 array, equal sizes chosen "for sake of
// simplicity of implementation").  On the FPGA each partition would be a
// floor-plan region with its own Vccint; in the RTL the partition only
// decides which timing_fail-part-i flag a MAC's Razor flag feeds (see
// part_fail_monitor).  The cells themselves are identical.
//
// Interface: act_top[j] / wgt_left[i] are the skewed operand inputs; clr
// clears every accumulator in the same cycle; y[i][j] and err[i][j] are each
// cell's accumulator and Razor flag.
module systolic_array #(
  parameter int unsigned ROWS   = tpu_pkg::ROWS,
  parameter int unsigned COLS   = tpu_pkg::COLS,
  parameter int unsigned DATA_W = tpu_pkg::DATA_W,
  parameter int unsigned ACC_W  = tpu_pkg::ACC_W
) (
  input  logic                                  clk,
  input  logic                                  dclk,
  input  logic                                  rst_n,
  input  logic                                  clr,
  input  logic [COLS-1:0][DATA_W-1:0]           act_top,
  input  logic [ROWS-1:0][DATA_W-1:0]           wgt_left,
  output logic [ROWS-1:0][COLS-1:0][ACC_W-1:0]  y,
  output logic [ROWS-1:0][COLS-1:0]             err
);

  // act[i][j]: activation entering cell (i,j) from above; row ROWS is unused
  // wgt[i][j]: weight entering cell (i,j) from the left; column COLS unused
  logic [ROWS:0][COLS-1:0][DATA_W-1:0] act;
  logic [ROWS-1:0][COLS:0][DATA_W-1:0] wgt;

  assign act[0] = act_top;

  for (genvar i = 0; i < ROWS; i++) begin : GEN_REG_I
    assign wgt[i][0] = wgt_left[i];
    for (genvar j = 0; j < COLS; j++) begin : GEN_REG_J
      mac #(.DATA_W(DATA_W), .ACC_W(ACC_W)) uut (
        .clk   (clk),
        .dclk  (dclk),
        .rst_n (rst_n),
        .clr   (clr),
        .a_in  (act[i][j]),
        .b_in  (wgt[i][j]),
        .a_out (act[i+1][j]),
        .b_out (wgt[i][j+1]),
        .y     (y[i][j]),
        .err   (err[i][j])
      );
    end
  end

endmodule
