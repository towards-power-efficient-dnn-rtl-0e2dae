// mac -- multiply-accumulate cell of the systolic array, with a Razor check.
//
// Datapath (paper's MAC diagram): a Multiplier forms A*B, an Adder adds the
// product to the Accumulator output Y, and the Accumulator stores the sum,
// Y[2n-1:0].  The cell is output-stationary: Y keeps its own running sum.
// The operands it used are registered and passed on unchanged, A to the next
// cell along the activation direction and B to the next cell along the
// weight direction (the paper's timing report shows paths from one cell's
// prev_activ register into the next cell's output register).
//
// Timing-error detection follows the paper: the accumulator is a Razor
// register whose shadow copy has its own multiplier and adder, clocked by
// the delayed clock dclk.  The main path computes Y + a_in*b_in at the clk
// edge; the shadow path recomputes the same sum half a step later from the
// operands and clear that this cell registered at that edge, adding them to
// the shadow's own running sum.  While no path is late, Y and S stay equal.
// Once a late result has been captured, the flag err stays high until the
// next clear resynchronises both accumulators (the paper describes no
// recovery of R from S, so none is built).
//
// Interface and timing:
//   clr   synchronous: the cell ignores a_in/b_in and loads zero in that cycle
//   a_in, b_in are accumulated at the next clk edge; a_out/b_out present
//   them one clk later; y is the sum; err is valid one clk after y.
// Product and sum wrap modulo 2^ACC_W (Y is 2n bits in the paper's figure).
module mac #(
  parameter int unsigned DATA_W = 8,
  parameter int unsigned ACC_W  = 2 * DATA_W
) (
  input  logic              clk,
  input  logic              dclk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic [DATA_W-1:0] a_in,    // activation from the previous cell
  input  logic [DATA_W-1:0] b_in,    // weight from the previous cell
  output logic [DATA_W-1:0] a_out,   // registered activation (prev_activ)
  output logic [DATA_W-1:0] b_out,   // registered weight
  output logic [ACC_W-1:0]  y,       // accumulator Y
  output logic              err      // Razor flag of this MAC
);

  logic [DATA_W-1:0] prev_activ, prev_weight;
  logic              clr_q;
  logic [ACC_W-1:0]  sum_main, sum_shadow, s_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_activ  <= '0;
      prev_weight <= '0;
      clr_q       <= 1'b0;
    end else begin
      prev_activ  <= a_in;
      prev_weight <= b_in;
      clr_q       <= clr;
    end
  end

  // Main multiplier and adder (sampled by clk)
  always_comb begin
    if (clr) sum_main = '0;
    else     sum_main = y + ACC_W'(a_in * b_in);
  end

  // Duplicated multiplier and adder for the shadow register (sampled by dclk)
  always_comb begin
    if (clr_q) sum_shadow = '0;
    else       sum_shadow = s_q + ACC_W'(prev_activ * prev_weight);
  end

  razor_ff #(.W(ACC_W)) u_acc (
    .clk      (clk),
    .dclk     (dclk),
    .rst_n    (rst_n),
    .d        (sum_main),
    .d_shadow (sum_shadow),
    .r_q      (y),
    .s_q      (s_q),
    .err      (err)
  );

  assign a_out = prev_activ;
  assign b_out = prev_weight;

endmodule
