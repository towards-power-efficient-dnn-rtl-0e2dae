// tb_tpu_control -- self-checking test of the command sequencer.
//
// The buffer and FIFO are modelled here: the buffer returns a word derived
// from the address one cycle after it, the FIFO returns the n-th popped
// vector one cycle after the pop, and its empty flag follows a random
// pattern so the controller has to stall.  The array outputs are a fixed
// pattern.  Checked: the clear pulses, one pop and one buffer read per k at
// act_base+k, operand gating (data in the cycle after an issue, zero
// otherwise), the drain writes (address and packing), the calibration pulse
// only when enabled, and the total latency
//   K + stalls + (ROWS+COLS+1) + ROWS*ACC_W/DATA_W + 4 cycles.
module tb_tpu_control;
  localparam int R = 16, C = 16, DW = 8, ACW = 16, AW = 8;
  localparam int RW = ACW / DW;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, calib_en = 1'b0, busy, done, stall;
  logic [AW-1:0] act_base = '0, res_base = '0, k_len = '0;
  logic fifo_empty = 1'b1, fifo_pop;
  logic [R-1:0][DW-1:0] fifo_rdata = '0;
  logic ub_we;
  logic [AW-1:0] ub_addr;
  logic [C*DW-1:0] ub_wdata;
  logic [C-1:0][DW-1:0] ub_rdata = '0;
  logic arr_clr, mon_clear, vstep;
  logic [C-1:0][DW-1:0] act_vec;
  logic [R-1:0][DW-1:0] wgt_vec;
  logic [R-1:0][C-1:0][ACW-1:0] y;
  int checks = 0, failures = 0;
  int pops = 0;

  tpu_control #(.ROWS(R), .COLS(C), .DATA_W(DW), .ACC_W(ACW), .AW(AW), .KW(AW)) dut (
    .clk, .rst_n, .start, .act_base, .k_len, .res_base, .calib_en, .busy, .done, .stall,
    .fifo_empty, .fifo_pop, .fifo_rdata, .ub_we, .ub_addr, .ub_wdata, .ub_rdata,
    .arr_clr, .act_vec, .wgt_vec, .y, .mon_clear, .vstep);

  initial forever #5 clk = ~clk;

  function automatic logic [C-1:0][DW-1:0] word_of(input logic [AW-1:0] a);
    logic [C-1:0][DW-1:0] w;
    for (int j = 0; j < C; j++) w[j] = DW'(a * 7 + j);
    return w;
  endfunction
  function automatic logic [R-1:0][DW-1:0] wvec_of(input int n);
    logic [R-1:0][DW-1:0] w;
    for (int i = 0; i < R; i++) w[i] = DW'(n * 13 + i + 1);
    return w;
  endfunction

  always_comb
    for (int i = 0; i < R; i++) for (int j = 0; j < C; j++) y[i][j] = ACW'(i * 1000 + j * 3 + 1);

  // buffer and FIFO models
  always_ff @(posedge clk) begin
    ub_rdata <= word_of(ub_addr);
    if (fifo_pop) begin fifo_rdata <= wvec_of(pops); pops <= pops + 1; end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic run(input int K, input int abase, input int rbase, input bit cal);
    int cyc, stalls, clr_n, mclr_n, vst_n, wr_n, issued, pops0;
    bit issued_q;
    logic [AW-1:0] addr_q;
    logic [C*DW-1:0] ew;
    pops0 = pops;
    @(negedge clk);
    start = 1; act_base = AW'(abase); res_base = AW'(rbase); k_len = AW'(K); calib_en = cal;
    @(negedge clk);
    start = 0; act_base = '0; res_base = '0; k_len = '0; calib_en = 0;
    cyc = 1; stalls = 0; clr_n = 0; mclr_n = 0; vst_n = 0; wr_n = 0; issued = 0;
    issued_q = 0; addr_q = '0;
    while (!done && cyc < 400) begin
      fifo_empty = ($urandom_range(0, 3) == 0);
      #1;
      if (arr_clr) clr_n++;
      if (mon_clear) begin mclr_n++; check(cyc <= 2, "monitor clear at start"); end
      if (vstep) vst_n++;
      if (stall) stalls++;
      // gating: operands only in the cycle after an issue
      if (issued_q) begin
        check(act_vec == word_of(addr_q), "activation vector = buffer word");
        check(wgt_vec == wvec_of(pops0 + issued - 1), "weight vector = popped entry");
      end else begin
        check(act_vec == '0 && wgt_vec == '0, "zero bubble");
      end
      issued_q = fifo_pop;
      if (fifo_pop) begin
        check(!fifo_empty, "no pop while empty");
        check(ub_addr == AW'(abase + issued), "activation address");
        addr_q = ub_addr;
        issued++;
      end
      if (ub_we) begin
        check(ub_addr == AW'(rbase + wr_n), "result address");
        for (int c = 0; c < C / RW; c++)
          ew[c*ACW +: ACW] = y[wr_n / RW][(wr_n % RW) * (C / RW) + c];
        check(ub_wdata == ew, "result packing");
        wr_n++;
      end
      @(negedge clk);
      cyc++;
    end
    check(issued == K, $sformatf("issued %0d of %0d", issued, K));
    check(clr_n == 1 && mclr_n == 2, "clear pulses");
    check(vst_n == (cal ? 1 : 0), "calibration step only when enabled");
    check(wr_n == R * RW, "result words written");
    check(cyc == K + stalls + (R + C + 1) + R * RW + 4,
          $sformatf("latency %0d (stalls %0d)", cyc, stalls));
    if (K >= 20) check(stalls > 0, "stall exercised");
    @(negedge clk);
    check(!busy, "idle after done");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    run(20, 10, 100, 1'b1);
    run(33, 40, 200, 1'b0);
    run(1, 0, 0, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
