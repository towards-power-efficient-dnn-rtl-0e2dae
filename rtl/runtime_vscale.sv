// runtime_vscale -- runtime Vccint calibration, the paper's Algorithm 2.
//
// Holds the supply request Vccint_i of every partition.  load copies the
// static estimate (Algorithm 1) in and zeroes the step counts.  Each step
// pulse then applies, to all partitions in the same cycle,
//     if timing_fail-part-i:  Vccint_i += Vs   else  Vccint_i -= Vs
// so the voltage of a partition that saw a Razor error rises one step and
// that of a partition that saw none falls one step, as in the paper.
// c_steps[i] counts the net steps applied, the C_i of the paper's final
// voltage Vccint_i + C_i*Vs.  The paper says C_i runs "from 0 to any positive
// value" but Algorithm 2 and the flow diagram (+/-) also step down; this
// block follows Algorithm 2, so C_i is signed.
//
// Bounds are this design's choice (not in the paper): a step that would
// leave the window [v_lo, v_hi] is not applied and C_i is left unchanged;
// at_limit[i] reports that the last step of partition i was refused.
// Timing: vccint and c_steps change one clk after load or step; load wins
// over step.
module runtime_vscale #(
  parameter int unsigned NPART  = tpu_pkg::NPART,
  parameter int unsigned VOLT_W = tpu_pkg::VOLT_W,
  parameter int unsigned CNT_W  = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         load,
  input  logic [NPART-1:0][VOLT_W-1:0] v_init,
  input  logic [VOLT_W-1:0]            v_step,
  input  logic [VOLT_W-1:0]            v_lo,
  input  logic [VOLT_W-1:0]            v_hi,
  input  logic                         step,
  input  logic [NPART-1:0]             fail,
  output logic [NPART-1:0][VOLT_W-1:0] vccint,
  output logic [NPART-1:0][CNT_W-1:0]  c_steps,   // signed two's complement
  output logic [NPART-1:0]             at_limit
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vccint   <= '0;
      c_steps  <= '0;
      at_limit <= '0;
    end else if (load) begin
      vccint   <= v_init;
      c_steps  <= '0;
      at_limit <= '0;
    end else if (step) begin
      for (int i = 0; i < NPART; i++) begin
        if (fail[i]) begin
          // raise by one step if it stays at or below v_hi
          if ({1'b0, vccint[i]} + {1'b0, v_step} <= {1'b0, v_hi}) begin
            vccint[i]   <= vccint[i] + v_step;
            c_steps[i]  <= c_steps[i] + 1'b1;
            at_limit[i] <= 1'b0;
          end else begin
            at_limit[i] <= 1'b1;
          end
        end else begin
          // lower by one step if it stays at or above v_lo
          if (vccint[i] >= v_step && vccint[i] - v_step >= v_lo) begin
            vccint[i]   <= vccint[i] - v_step;
            c_steps[i]  <= c_steps[i] - 1'b1;
            at_limit[i] <= 1'b0;
          end else begin
            at_limit[i] <= 1'b1;
          end
        end
      end
    end
  end

endmodule
