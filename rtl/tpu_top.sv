// tpu_top -- TPU with a partitioned, voltage-scaled systolic array.
//
// The datapath is a small TPU: a unified buffer holds activation vectors, a
// weight FIFO delivers weight vectors, two data-setup skews turn each pair of
// vectors into diagonal wavefronts, and a ROWS x COLS output-stationary
// systolic array of MACs accumulates P = W * X; the controller then writes P
// back to the unified buffer.  The host link (PCI, host interface) and the
// DDR3 weight path are not built: the buffer's host port and the FIFO's push
// port are top-level ports instead.
//
// Power management follows the paper's static + runtime scheme.  The array
// is split into NPART partitions (four 8 x 8 quadrants of the 16 x 16 array),
// each meant to sit in its own FPGA region with its own core supply
// Vccint_i.  On vs_init, static_vscale (Algorithm 1) spreads the partitions
// over the critical region Vcrash..Vmin and its result is loaded into
// runtime_vscale.  Every MAC carries a Razor register that flags a late
// result; part_fail_monitor gathers the flags into timing_fail-part-i, and
// after each command run with calib_en the runtime scheme (Algorithm 2)
// raises the voltage of each failing partition by Vs and lowers the others
// by Vs.  The requested voltages leave on vccint_uv for the external power
// distribution unit, which is not logic and is not modelled.  dclk, the
// Razor shadow clock (clk delayed by T_del), is an input.
//
// Command timing: act_base, k_len, res_base and calib_en are sampled in the
// start cycle; done is high K + stalls + (ROWS+COLS+1) + ROWS*ACC_W/DATA_W + 4
// clk cycles after it (K + 69 at the default size without stalls).  Host-port
// reads return data one clk after the address.
//
// What follows the paper: the MAC structure, Razor detection, partitioning
// into quadrants with one fail flag each, and Algorithms 1 and 2.  This
// design's own choices: operand width, buffer sizes, the command sequence,
// stall handling, the voltage window and when calibration steps happen.
module tpu_top #(
  parameter int unsigned ROWS      = tpu_pkg::ROWS,
  parameter int unsigned COLS      = tpu_pkg::COLS,
  parameter int unsigned PART_ROWS = tpu_pkg::PART_ROWS,
  parameter int unsigned PART_COLS = tpu_pkg::PART_COLS,
  parameter int unsigned DATA_W    = tpu_pkg::DATA_W,
  parameter int unsigned ACC_W     = tpu_pkg::ACC_W,
  parameter int unsigned VOLT_W    = tpu_pkg::VOLT_W,
  parameter int unsigned UB_DEPTH  = 256,
  parameter int unsigned WF_DEPTH  = 64,
  parameter int unsigned CNT_W     = 8,
  localparam int unsigned NPART    = PART_ROWS * PART_COLS,
  localparam int unsigned AW       = $clog2(UB_DEPTH),
  localparam int unsigned UB_W     = COLS * DATA_W,
  localparam int unsigned WF_W     = ROWS * DATA_W
) (
  input  logic                          clk,
  input  logic                          dclk,
  input  logic                          rst_n,
  // host port of the unified buffer (stands in for PCI / host interface)
  input  logic                          host_we,
  input  logic [AW-1:0]                 host_addr,
  input  logic [UB_W-1:0]               host_wdata,
  output logic [UB_W-1:0]               host_rdata,
  // weight FIFO push port (stands in for the DDR3 interface)
  input  logic                          w_push,
  input  logic [WF_W-1:0]               w_data,
  output logic                          w_full,
  // command
  input  logic                          start,
  input  logic [AW-1:0]                 act_base,
  input  logic [AW-1:0]                 k_len,
  input  logic [AW-1:0]                 res_base,
  input  logic                          calib_en,
  output logic                          busy,
  output logic                          done,
  output logic                          stall,       // FIFO empty while streaming
  // voltage scaling
  input  logic                          vs_init,     // run the static scheme
  input  logic [VOLT_W-1:0]             v_min_uv,
  input  logic [VOLT_W-1:0]             v_crash_uv,
  input  logic [VOLT_W-1:0]             v_nom_uv,
  output logic                          vs_ready,    // static result loaded
  output logic [VOLT_W-1:0]             v_step_uv,
  output logic [NPART-1:0][VOLT_W-1:0]  vccint_uv,   // to the power distribution unit
  output logic [NPART-1:0][CNT_W-1:0]   c_steps,
  output logic [NPART-1:0]              timing_fail_part
);

  // ---------------------------------------------------------------- buffers
  logic                                 ctl_we;
  logic [AW-1:0]                        ctl_addr;
  logic [UB_W-1:0]                      ctl_wdata;
  logic [COLS-1:0][DATA_W-1:0]          ctl_rdata;

  unified_buffer #(.WIDTH(UB_W), .DEPTH(UB_DEPTH)) u_ub (
    .clk     (clk),
    .a_we    (host_we),
    .a_addr  (host_addr),
    .a_wdata (host_wdata),
    .a_rdata (host_rdata),
    .b_we    (ctl_we),
    .b_addr  (ctl_addr),
    .b_wdata (ctl_wdata),
    .b_rdata (ctl_rdata)
  );

  logic                        wf_pop, wf_empty;
  logic [ROWS-1:0][DATA_W-1:0] wf_rdata;

  weight_fifo #(.WIDTH(WF_W), .DEPTH(WF_DEPTH)) u_wfifo (
    .clk   (clk),
    .rst_n (rst_n),
    .push  (w_push),
    .wdata (w_data),
    .full  (w_full),
    .pop   (wf_pop),
    .rdata (wf_rdata),
    .empty (wf_empty),
    .count ()
  );

  // ------------------------------------------------------------- controller
  logic                                 arr_clr, mon_clear, vstep;
  logic [COLS-1:0][DATA_W-1:0]          act_vec, act_skew;
  logic [ROWS-1:0][DATA_W-1:0]          wgt_vec, wgt_skew;
  logic [ROWS-1:0][COLS-1:0][ACC_W-1:0] y;
  logic [ROWS-1:0][COLS-1:0]            mac_err;

  tpu_control #(
    .ROWS(ROWS), .COLS(COLS), .DATA_W(DATA_W), .ACC_W(ACC_W), .AW(AW), .KW(AW)
  ) u_ctl (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (start),
    .act_base   (act_base),
    .k_len      (k_len),
    .res_base   (res_base),
    .calib_en   (calib_en),
    .busy       (busy),
    .done       (done),
    .stall      (stall),
    .fifo_empty (wf_empty),
    .fifo_pop   (wf_pop),
    .fifo_rdata (wf_rdata),
    .ub_we      (ctl_we),
    .ub_addr    (ctl_addr),
    .ub_wdata   (ctl_wdata),
    .ub_rdata   (ctl_rdata),
    .arr_clr    (arr_clr),
    .act_vec    (act_vec),
    .wgt_vec    (wgt_vec),
    .y          (y),
    .mon_clear  (mon_clear),
    .vstep      (vstep)
  );

  // ------------------------------------------------------ data setup, array
  systolic_data_setup #(.LANES(COLS), .DATA_W(DATA_W)) u_setup_act (
    .clk (clk), .rst_n (rst_n), .in_vec (act_vec), .out_vec (act_skew)
  );

  systolic_data_setup #(.LANES(ROWS), .DATA_W(DATA_W)) u_setup_wgt (
    .clk (clk), .rst_n (rst_n), .in_vec (wgt_vec), .out_vec (wgt_skew)
  );

  systolic_array #(.ROWS(ROWS), .COLS(COLS), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_array (
    .clk      (clk),
    .dclk     (dclk),
    .rst_n    (rst_n),
    .clr      (arr_clr),
    .act_top  (act_skew),
    .wgt_left (wgt_skew),
    .y        (y),
    .err      (mac_err)
  );

  // ------------------------------------------------------- voltage scaling
  logic [NPART-1:0]             fail_now;
  logic [NPART-1:0][VOLT_W-1:0] v_static;
  logic                         st_done, st_busy;

  part_fail_monitor #(
    .ROWS(ROWS), .COLS(COLS), .PART_ROWS(PART_ROWS), .PART_COLS(PART_COLS)
  ) u_mon (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (mon_clear),
    .mac_err   (mac_err),
    .fail_now  (fail_now),
    .fail_seen (timing_fail_part)
  );

  static_vscale #(.NPART(NPART), .VOLT_W(VOLT_W)) u_static (
    .clk     (clk),
    .rst_n   (rst_n),
    .start   (vs_init),
    .v_min   (v_min_uv),
    .v_crash (v_crash_uv),
    .busy    (st_busy),
    .done    (st_done),
    .v_step  (v_step_uv),
    .vccint  (v_static)
  );

  runtime_vscale #(.NPART(NPART), .VOLT_W(VOLT_W), .CNT_W(CNT_W)) u_runtime (
    .clk      (clk),
    .rst_n    (rst_n),
    .load     (st_done),
    .v_init   (v_static),
    .v_step   (v_step_uv),
    .v_lo     (v_crash_uv),
    .v_hi     (v_nom_uv),
    .step     (vstep),
    .fail     (timing_fail_part),
    .vccint   (vccint_uv),
    .c_steps  (c_steps),
    .at_limit ()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       vs_ready <= 1'b0;
    else if (vs_init) vs_ready <= 1'b0;
    else if (st_done) vs_ready <= 1'b1;
  end

endmodule
