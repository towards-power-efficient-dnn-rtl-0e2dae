// tb_mac -- self-checking test of one Razor-checked MAC.
//
// Random operands are accumulated after a clear and the accumulator is
// compared every cycle with a sum kept by the testbench (modulo 2^ACC_W);
// the forwarded operands must appear one cycle after they were consumed.
// A timing failure is then emulated: right after a clk edge the main
// accumulator is forced back to its previous value, as if the new sum had
// arrived too late for R; the shadow copy (its own multiplier and adder on
// dclk) still holds the right sum, so err must rise at the next edge, and
// stay high until a clear resynchronises R and S.
module tb_mac;
  localparam int DW = 8, AW = 16;
  logic clk = 1'b0, dclk = 1'b0, rst_n = 1'b0, clr = 1'b0;
  logic [DW-1:0] a_in = '0, b_in = '0, a_out, b_out;
  logic [AW-1:0] y;
  logic err;
  int checks = 0, failures = 0;

  mac #(.DATA_W(DW), .ACC_W(AW)) dut (.clk, .dclk, .rst_n, .clr, .a_in, .b_in,
                                      .a_out, .b_out, .y, .err);

  initial forever #5 clk = ~clk;
  initial begin #3; forever #5 dclk = ~dclk; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    logic [AW-1:0] acc, stale;
    logic [DW-1:0] pa, pb;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    // clear, then accumulate 60 random products
    @(negedge clk) clr = 1'b1;
    @(negedge clk) clr = 1'b0;
    check(y == 0, "clear");
    acc = '0;
    for (int n = 0; n < 60; n++) begin
      pa = DW'($urandom); pb = DW'($urandom);
      a_in = pa; b_in = pb;
      @(negedge clk);
      acc = acc + AW'(pa) * AW'(pb);
      check(y == acc, "accumulated sum");
      check(a_out == pa && b_out == pb, "forwarded operands");
      check(err == 1'b0, "no error without late data");
    end
    // emulate a late-arriving sum in the main register
    a_in = 8'd3; b_in = 8'd5;
    @(posedge clk);
    stale = acc;
    #1 force dut.u_acc.r_q = stale;
    #1 release dut.u_acc.r_q;
    a_in = '0; b_in = '0;
    @(negedge clk);
    check(y == stale, "main register kept the stale sum");
    check(dut.u_acc.s_q == stale + 16'd15, "shadow register holds the right sum");
    @(negedge clk);
    check(err == 1'b1, "error flagged one cycle later");
    @(negedge clk);
    check(err == 1'b1, "error persists until clear");
    clr = 1'b1;
    @(negedge clk) clr = 1'b0;
    @(negedge clk);
    @(negedge clk);
    check(err == 1'b0 && y == 0, "clear resynchronises R and S");
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
