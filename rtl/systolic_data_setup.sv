// systolic_data_setup -- skews an operand vector for the systolic array.
//
// Lane k of the input vector is delayed by k clk cycles (lane 0 passes
// straight through), so that a vector presented in one cycle enters the
// array as a diagonal wavefront.  With activations skewed across the
// columns and weights skewed across the rows, element k of activation
// column j and element k of weight row i reach cell (i,j) in the same cycle.
// The paper only names the "Systolic Data Setup" block of the TPU; the
// triangular shift-register structure is this design's choice.  The caller
// feeds zeros when it has no data, which leaves the accumulators unchanged.
module systolic_data_setup #(
  parameter int unsigned LANES  = tpu_pkg::COLS,
  parameter int unsigned DATA_W = tpu_pkg::DATA_W
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [LANES-1:0][DATA_W-1:0]   in_vec,
  output logic [LANES-1:0][DATA_W-1:0]   out_vec
);

  assign out_vec[0] = in_vec[0];

  for (genvar k = 1; k < LANES; k++) begin : g_lane
    logic [k-1:0][DATA_W-1:0] sr;   // sr[0] is the newest stage
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) sr <= '0;
      else begin
        sr[0] <= in_vec[k];
        for (int s = 1; s < k; s++) sr[s] <= sr[s-1];
      end
    end
    assign out_vec[k] = sr[k-1];
  end

endmodule
