// static_vscale -- static (offline) Vccint estimate, the paper's Algorithm 1.
//
// Given the technology's crash voltage Vcrash and minimum safe voltage Vmin,
// the critical region Vcrash..Vmin is cut into n equal steps
//     Vs = (Vmin - Vcrash) / n
// and partition i receives the middle of step i:
//     Vl = Vcrash;  for i = 0..n-1: Vccint_i = (Vl + Vl + Vs) / 2;  Vl += Vs
// Partition 0 (lowest voltage) is meant for the MACs with the most slack.
// With the Artix-7 guard band used in the paper (Vcrash 0.95 V, Vmin 1.00 V,
// n = 4) this gives Vs = 12.5 mV and 0.95625, 0.96875, 0.98125, 0.99375 V.
// (The paper prints 0.956, 0.968, 0.985 and 0.993 V; its third value does not
// follow from the algorithm, and this block follows the algorithm.)
//
// The loop runs in hardware one partition per clk, as written: start (one
// cycle) latches Vmin/Vcrash and computes Vs, then NPART cycles produce
// vccint[0..NPART-1]; done pulses for one cycle in the cycle after the last
// write, when vccint and v_step are all valid.  Voltages are unsigned
// microvolts; the halving truncates (exact for the paper's numbers).
// Vmin below Vcrash is not checked and gives meaningless values.
module static_vscale #(
  parameter int unsigned NPART  = tpu_pkg::NPART,
  parameter int unsigned VOLT_W = tpu_pkg::VOLT_W
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [VOLT_W-1:0]            v_min,
  input  logic [VOLT_W-1:0]            v_crash,
  output logic                         busy,
  output logic                         done,
  output logic [VOLT_W-1:0]            v_step,   // Vs
  output logic [NPART-1:0][VOLT_W-1:0] vccint    // Vccint_i
);

  localparam int unsigned IW = (NPART > 1) ? $clog2(NPART) : 1;

  typedef enum logic [1:0] {S_IDLE, S_LOOP, S_DONE} state_t;
  state_t            state;
  logic [IW-1:0]     idx;
  logic [VOLT_W-1:0] v_l;
  logic [VOLT_W:0]   mid;      // one extra bit for Vl + Vl + Vs

  assign mid  = ({1'b0, v_l} << 1) + {1'b0, v_step};
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      idx    <= '0;
      v_l    <= '0;
      v_step <= '0;
      vccint <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          v_step <= VOLT_W'((v_min - v_crash) / VOLT_W'(NPART));
          v_l    <= v_crash;
          idx    <= '0;
          state  <= S_LOOP;
        end
        S_LOOP: begin
          vccint[idx] <= mid[VOLT_W:1];
          v_l         <= v_l + v_step;
          if (idx == IW'(NPART - 1)) state <= S_DONE;
          idx <= idx + 1'b1;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
