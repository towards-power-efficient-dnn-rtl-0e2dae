// razor_ff -- double-sampling (Razor) register for timing-error detection.
//
// The main register R captures d on the rising edge of clk.  The shadow
// register S captures d_shadow on the rising edge of dclk, a copy of clk that
// lags it by T_del.  Data that reaches the end of its path after R has
// sampled but before S samples leaves the two registers different; the flag
// F (err) reports that disagreement.  F is itself registered on clk, so it
// changes only at clk edges and reports the cycle whose R/S pair disagreed
// one clk later, as in the paper's fault-detection timing diagram.
//
// Following the paper, the shadow is fed from its own (duplicated) logic:
// d_shadow is a separate input so that the parent can build the second copy
// of the multiply-add.  Both inputs must carry the same value when no timing
// error occurs.  The reset (asynchronous, active low) clears R, S and F; it
// is this design's choice, the paper does not describe reset.
module razor_ff #(
  parameter int unsigned W = 16
) (
  input  logic         clk,       // main clock CLK
  input  logic         dclk,      // delayed clock DCLK (CLK + T_del)
  input  logic         rst_n,
  input  logic [W-1:0] d,         // main path data, sampled by clk
  input  logic [W-1:0] d_shadow,  // duplicated path data, sampled by dclk
  output logic [W-1:0] r_q,       // main register R
  output logic [W-1:0] s_q,       // shadow register S
  output logic         err        // error flag F
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r_q <= '0;
    else        r_q <= d;
  end

  always_ff @(posedge dclk or negedge rst_n) begin
    if (!rst_n) s_q <= '0;
    else        s_q <= d_shadow;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) err <= 1'b0;
    else        err <= (r_q != s_q);
  end

endmodule
