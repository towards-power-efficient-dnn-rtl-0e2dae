// tpu_workload_run -- one array configuration driven through one trial run.
//
// Used by tb_tpu_workloads to run the TPU at the array sizes and partition
// grids of the evaluated configurations.  It instantiates tpu_top with the
// given size, runs the static scheme for the given Vcrash/Vmin and checks
// every partition's voltage against Vcrash + (2p+1)*Vs/2 with
// Vs = (Vmin-Vcrash)/P; then runs one calibrated K-step matrix multiply while
// disturbing the main accumulator of MAC (INJ_I, INJ_J) as a late result
// would, and checks all ROWS*COLS products, that only the partition holding
// that MAC flags a failure, and the runtime step of every partition.
// finished rises when it is done; checks/failures are its counts.
module tpu_workload_run #(
  parameter int ROWS = 32, COLS = 32, PART_ROWS = 2, PART_COLS = 2,
  parameter int K = 8, INJ_I = 20, INJ_J = 5,
  parameter int VCRASH = 950_000, VMIN = 1_000_000, VNOM = 1_000_000
) (
  output logic finished,
  output int   checks,
  output int   failures
);
  localparam int DW = 8, ACW = 16, VW = 24, CW = 8, AW = 8, RW = 2;
  localparam int NP = PART_ROWS * PART_COLS;
  localparam int RBASE = 16;

  logic clk = 1'b0, dclk = 1'b0, rst_n = 1'b0;
  logic host_we = 1'b0;
  logic [AW-1:0] host_addr = '0;
  logic [COLS*DW-1:0] host_wdata = '0, host_rdata;
  logic w_push = 1'b0, w_full;
  logic [ROWS*DW-1:0] w_data = '0;
  logic start = 1'b0, calib_en = 1'b0, busy, done, stall;
  logic [AW-1:0] act_base = '0, k_len = '0, res_base = '0;
  logic vs_init = 1'b0, vs_ready;
  logic [VW-1:0] v_min_uv = VW'(VMIN), v_crash_uv = VW'(VCRASH), v_nom_uv = VW'(VNOM);
  logic [VW-1:0] v_step_uv;
  logic [NP-1:0][VW-1:0] vccint_uv;
  logic [NP-1:0][CW-1:0] c_steps;
  logic [NP-1:0] timing_fail_part;

  tpu_top #(.ROWS(ROWS), .COLS(COLS), .PART_ROWS(PART_ROWS), .PART_COLS(PART_COLS)) dut (.*);

  initial forever #5 clk = ~clk;
  initial begin #3; forever #5 dclk = ~dclk; end

  logic [DW-1:0] X [K][COLS];
  logic [DW-1:0] W [ROWS][K];
  logic [ACW-1:0] disturbed;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL [%0dx%0d, %0d partitions] %s at %0t", ROWS, COLS, NP, what, $time);
    end
  endtask

  initial begin
    int vs, ev, inj_p, wrong;
    logic [COLS*DW-1:0] xv;
    logic [ROWS*DW-1:0] wv;
    logic [ACW-1:0] exp_p;
    finished = 1'b0; checks = 0; failures = 0;
    for (int k = 0; k < K; k++) begin
      for (int j = 0; j < COLS; j++) X[k][j] = DW'($urandom);
      for (int i = 0; i < ROWS; i++) W[i][k] = DW'($urandom);
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(negedge clk) vs_init = 1;
    @(negedge clk) vs_init = 0;
    wait (vs_ready);
    @(negedge clk);
    vs = (VMIN - VCRASH) / NP;
    check(v_step_uv == VW'(vs), "Vs");
    for (int p = 0; p < NP; p++)
      check(vccint_uv[p] == VW'(VCRASH + ((2 * p + 1) * vs) / 2),
            $sformatf("static Vccint_%0d = %0d", p, vccint_uv[p]));
    // load operands
    for (int k = 0; k < K; k++) begin
      for (int j = 0; j < COLS; j++) xv[j*DW +: DW] = X[k][j];
      @(negedge clk) begin host_we = 1; host_addr = AW'(k); host_wdata = xv; end
    end
    @(negedge clk) host_we = 0;
    for (int k = 0; k < K; k++) begin
      for (int i = 0; i < ROWS; i++) wv[i*DW +: DW] = W[i][k];
      @(negedge clk) begin w_push = 1; w_data = wv; end
    end
    @(negedge clk) w_push = 0;
    // trial run with one late result
    start = 1; act_base = '0; k_len = AW'(K); res_base = AW'(RBASE); calib_en = 1;
    @(negedge clk) start = 0;
    wait (dut.u_ctl.ub_we);
    @(posedge clk);
    #1 disturbed = dut.u_array.GEN_REG_I[INJ_I].GEN_REG_J[INJ_J].uut.u_acc.r_q + 16'd1;
    force dut.u_array.GEN_REG_I[INJ_I].GEN_REG_J[INJ_J].uut.u_acc.r_q = disturbed;
    #1 release dut.u_array.GEN_REG_I[INJ_I].GEN_REG_J[INJ_J].uut.u_acc.r_q;
    wait (done);
    @(negedge clk);
    inj_p = (INJ_I / (ROWS / PART_ROWS)) * PART_COLS + INJ_J / (COLS / PART_COLS);
    for (int p = 0; p < NP; p++)
      check(timing_fail_part[p] == (p == inj_p), $sformatf("fail flag of partition %0d", p));
    // results
    wrong = 0;
    for (int i = 0; i < ROWS; i++) for (int w = 0; w < RW; w++) begin
      @(negedge clk) host_addr = AW'(RBASE + i * RW + w);
      @(negedge clk);
      for (int c = 0; c < COLS / RW; c++) begin
        int j;
        j = w * (COLS / RW) + c;
        exp_p = '0;
        for (int k = 0; k < K; k++) exp_p += ACW'(W[i][k]) * ACW'(X[k][j]);
        if (i == INJ_I && j == INJ_J) exp_p += 16'd1;
        if (host_rdata[c*ACW +: ACW] != exp_p) wrong++;
        checks++;
      end
    end
    if (wrong != 0) begin failures += wrong; $display("FAIL %0d wrong products", wrong); end
    // runtime step: failing partition up, others down, inside [Vcrash, Vnom]
    for (int p = 0; p < NP; p++) begin
      ev = VCRASH + ((2 * p + 1) * vs) / 2;
      if (p == inj_p) begin if (ev + vs <= VNOM) ev += vs; end
      else            begin if (ev - vs >= VCRASH) ev -= vs; end
      check(vccint_uv[p] == VW'(ev), $sformatf("Vccint_%0d after the step = %0d", p, vccint_uv[p]));
    end
    $display("[%0dx%0d in %0d partitions of %0dx%0d] static Vs=%0d uV, checks=%0d failures=%0d",
             ROWS, COLS, NP, ROWS / PART_ROWS, COLS / PART_COLS, vs, checks, failures);
    finished = 1'b1;
  end
endmodule
