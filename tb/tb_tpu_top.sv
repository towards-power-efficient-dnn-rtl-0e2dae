// tb_tpu_top -- end-to-end test of the voltage-scaled TPU at full size.
//
// The design is used with its default parameters (16 x 16 array, four 8 x 8
// partitions, Artix-7 guard band 0.95 V .. 1.00 V).  The testbench
//   1. runs the static scheme and checks the four starting voltages;
//   2. runs three matrix multiplies P = W * X (K = 24, 64 and 16) through
//      the host port and the weight FIFO, feeding weights slowly in the
//      first command so that the controller stalls on an empty FIFO;
//   3. during the first command (a trial run with calibration) disturbs
//      the main accumulator of MAC (9,3), in partition 2 (bottom-left), as
//      a late-arriving result would; Razor must flag that partition only,
//      the result of that MAC is then off by the disturbance while all
//      others are exact;
//   4. checks after every command that the runtime scheme stepped each
//      partition up (failed) or down (no failure) by Vs, refused steps that
//      would leave [Vcrash, Vnom], and left the voltages alone when
//      calibration was off.
// Expected products and voltages are computed here.  Every mechanism
// (stall, Razor failure, step up, step down, refused step, command without
// calibration) is counted and must occur at least once.
module tb_tpu_top;
  localparam int R = 16, C = 16, DW = 8, ACW = 16, NP = 4, VW = 24, CW = 8;
  localparam int AW = 8;
  localparam int RW = ACW / DW;

  logic clk = 1'b0, dclk = 1'b0, rst_n = 1'b0;
  logic host_we = 1'b0;
  logic [AW-1:0] host_addr = '0;
  logic [C*DW-1:0] host_wdata = '0, host_rdata;
  logic w_push = 1'b0, w_full;
  logic [R*DW-1:0] w_data = '0;
  logic start = 1'b0, calib_en = 1'b0, busy, done, stall;
  logic [AW-1:0] act_base = '0, k_len = '0, res_base = '0;
  logic vs_init = 1'b0, vs_ready;
  logic [VW-1:0] v_min_uv = VW'(1_000_000), v_crash_uv = VW'(950_000), v_nom_uv = VW'(1_000_000);
  logic [VW-1:0] v_step_uv;
  logic [NP-1:0][VW-1:0] vccint_uv;
  logic [NP-1:0][CW-1:0] c_steps;
  logic [NP-1:0] timing_fail_part;

  tpu_top dut (.*);

  initial forever #5 clk = ~clk;
  initial begin #3; forever #5 dclk = ~dclk; end

  int checks = 0, failures = 0;
  int n_stall = 0, n_fail = 0, n_up = 0, n_down = 0, n_refused = 0, n_nocal = 0;
  logic [ACW-1:0] disturbed;
  int ev [NP];
  int ec [NP];

  logic [DW-1:0] X [64][C];
  logic [DW-1:0] W [R][64];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  int busy_cycles = 0;
  always @(posedge clk) if (stall) n_stall++;
  always @(negedge clk) if (busy) busy_cycles++;

  task automatic host_write(input int a, input logic [C*DW-1:0] d);
    @(negedge clk);
    host_we = 1; host_addr = AW'(a); host_wdata = d;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic push_w(input int k);
    logic [R*DW-1:0] v;
    for (int i = 0; i < R; i++) v[i*DW +: DW] = W[i][k];
    @(negedge clk);
    check(!w_full, "FIFO has room");
    w_push = 1; w_data = v;
    @(negedge clk);
    w_push = 0;
  endtask

  // one command; inject = disturb MAC (9,3) while results drain
  task automatic command(input int K, input int abase, input int rbase,
                         input bit cal, input int npre, input bit inject);
    logic [C-1:0][DW-1:0] xv;
    logic [ACW-1:0] exp_p;
    logic [ACW-1:0] got;
    logic [NP-1:0] exp_fail;
    int b0, s0;
    // fresh random operands
    for (int k = 0; k < K; k++) begin
      for (int j = 0; j < C; j++) X[k][j] = DW'($urandom);
      for (int i = 0; i < R; i++) W[i][k] = DW'($urandom);
    end
    for (int k = 0; k < K; k++) begin
      for (int j = 0; j < C; j++) xv[j] = X[k][j];
      host_write(abase + k, xv);
    end
    for (int k = 0; k < npre; k++) push_w(k);
    @(negedge clk);
    b0 = busy_cycles; s0 = n_stall;
    start = 1; act_base = AW'(abase); k_len = AW'(K); res_base = AW'(rbase); calib_en = cal;
    @(negedge clk);
    start = 0;
    fork
      begin // remaining weights arrive slowly: one every third cycle
        for (int k = npre; k < K; k++) begin
          repeat (2) @(negedge clk);
          push_w(k);
        end
      end
      begin
        if (inject) begin
          wait (dut.u_ctl.ub_we);
          @(posedge clk);
          #1 disturbed = dut.u_array.GEN_REG_I[9].GEN_REG_J[3].uut.u_acc.r_q + 16'd1;
          force dut.u_array.GEN_REG_I[9].GEN_REG_J[3].uut.u_acc.r_q = disturbed;
          #1 release dut.u_array.GEN_REG_I[9].GEN_REG_J[3].uut.u_acc.r_q;
        end
      end
    join
    wait (done);
    @(negedge clk);
    exp_fail = inject ? 4'b0100 : 4'b0000;
    check(timing_fail_part == exp_fail, $sformatf("partition fail flags %b", timing_fail_part));
    if (timing_fail_part != 0) n_fail++;
    // read back and check the products
    for (int i = 0; i < R; i++) for (int w = 0; w < RW; w++) begin
      @(negedge clk);
      host_addr = AW'(rbase + i * RW + w);
      @(negedge clk);
      for (int c = 0; c < C / RW; c++) begin
        int j;
        j = w * (C / RW) + c;
        exp_p = '0;
        for (int k = 0; k < K; k++) exp_p += ACW'(W[i][k]) * ACW'(X[k][j]);
        if (inject && i == 9 && j == 3) exp_p += 16'd1;
        got = host_rdata[c*ACW +: ACW];
        check(got == exp_p, $sformatf("P[%0d][%0d] = %0d, expected %0d", i, j, got, exp_p));
      end
    end
    // latency: K + stalls + (ROWS+COLS+1) + 2*ROWS + 4
    check(busy_cycles - b0 == K + (n_stall - s0) + (R + C + 1) + R * RW + 4,
          $sformatf("command latency %0d cycles, %0d stalls", busy_cycles - b0, n_stall - s0));
    // runtime voltage model
    if (cal) begin
      for (int p = 0; p < NP; p++) begin
        if (exp_fail[p]) begin
          if (ev[p] + 12_500 <= 1_000_000) begin ev[p] += 12_500; ec[p]++; n_up++; end
          else n_refused++;
        end else begin
          if (ev[p] - 12_500 >= 950_000) begin ev[p] -= 12_500; ec[p]--; n_down++; end
          else n_refused++;
        end
      end
    end else n_nocal++;
    for (int p = 0; p < NP; p++) begin
      check(vccint_uv[p] == VW'(ev[p]), $sformatf("Vccint_%0d = %0d, expected %0d",
            p, vccint_uv[p], ev[p]));
      check($signed(c_steps[p]) == CW'(ec[p]), $sformatf("C_%0d", p));
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // static scheme
    @(negedge clk) vs_init = 1;
    @(negedge clk) vs_init = 0;
    wait (vs_ready);
    @(negedge clk);
    check(v_step_uv == VW'(12_500), "Vs = 12.5 mV");
    ev[0] = 956_250; ev[1] = 968_750; ev[2] = 981_250; ev[3] = 993_750;
    for (int p = 0; p < NP; p++) begin
      ec[p] = 0;
      check(vccint_uv[p] == VW'(ev[p]), $sformatf("static Vccint_%0d", p));
    end
    command(24, 0, 100, 1'b1, 6, 1'b1);     // trial run with a Razor failure
    command(64, 24, 140, 1'b1, 64, 1'b0);   // clean run, calibration on
    // clean run, calibration off
    command(16, 0, 180, 1'b0, 16, 1'b0);
    command(24, 100, 0, 1'b1, 24, 1'b0);    // one more step down
    $display("stall cycles=%0d razor failures=%0d up=%0d down=%0d refused=%0d uncalibrated=%0d",
             n_stall, n_fail, n_up, n_down, n_refused, n_nocal);
    check(n_stall > 0, "stall happened");
    check(n_fail > 0, "Razor failure happened");
    check(n_up > 0, "voltage stepped up");
    check(n_down > 0, "voltage stepped down");
    check(n_refused > 0, "step refused at a limit");
    check(n_nocal > 0, "command without calibration");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
