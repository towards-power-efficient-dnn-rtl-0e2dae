// tb_razor_ff -- self-checking test of the Razor double-sampling register.
//
// clk has a 10-unit period; dclk is the same clock delayed by T_del = 3.
// Each cycle a new random value is presented either on time (half a cycle
// before the clk edge) or late (1 unit after the clk edge, i.e. after R has
// sampled but before S samples).  An on-time value must land in both R and
// S with no error; a late value must leave R with the old value, S with the
// new one, and raise F at the following clk edge (one-cycle flag latency).
module tb_razor_ff;
  localparam int W = 16;
  logic clk = 1'b0, dclk = 1'b0, rst_n = 1'b0;
  logic [W-1:0] data = '0, r_q, s_q;
  logic err;
  int checks = 0, failures = 0, late_errs = 0;

  razor_ff #(.W(W)) dut (.clk, .dclk, .rst_n, .d(data), .d_shadow(data),
                         .r_q, .s_q, .err);

  initial forever #5 clk = ~clk;
  initial begin #3; forever #5 dclk = ~dclk; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    logic [W-1:0] v, exp_r, exp_s;
    bit late, exp_err;
    exp_err = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    check(r_q == 0 && s_q == 0 && err == 0, "reset values");
    for (int n = 0; n < 300; n++) begin
      v    = W'($urandom);
      late = (n > 5) && ($urandom_range(0, 3) == 0);
      if (!late) begin
        @(negedge clk) data = v;
        @(posedge clk);
        exp_r = v; exp_s = v;
        #4;
      end else begin
        @(posedge clk);
        exp_r = data;
        #1 data = v;          // arrives after R sampled, before S samples
        exp_s = v;
        #3;
      end
      check(r_q == exp_r, "R value");
      check(s_q == exp_s, "S value");
      check(err == exp_err, "F flag");
      if (err) late_errs++;
      exp_err = (exp_r != exp_s);
    end
    check(late_errs > 0, "at least one late arrival flagged");
    $display("late arrivals flagged: %0d", late_errs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
