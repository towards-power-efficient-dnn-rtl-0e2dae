// tb_weight_fifo -- self-checking test of the weight FIFO.
//
// Random pushes and pops (never a push when full or a pop when empty, which
// the FIFO's assertions forbid) against a queue model.  Popped data must
// appear one cycle after the pop; full, empty and count are checked every
// cycle, and both full and empty must be reached.
module tb_weight_fifo;
  localparam int W = 128, D = 8;
  logic clk = 1'b0, rst_n = 1'b0, push = 1'b0, pop = 1'b0, full, empty;
  logic [W-1:0] wdata = '0, rdata;
  logic [$clog2(D):0] count;
  logic [W-1:0] q [$];
  int checks = 0, failures = 0, saw_full = 0, saw_empty = 0;

  weight_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .push, .wdata, .full,
    .pop, .rdata, .empty, .count);

  initial forever #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    logic [W-1:0] exp;
    bit popped;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < 800; n++) begin
      @(negedge clk);
      check(full == (q.size() == D) && empty == (q.size() == 0) && count == q.size(),
            "flags and count");
      if (full) saw_full++;
      if (empty) saw_empty++;
      // bias the traffic in phases so both full and empty are reached
      push = !full && ($urandom_range(0, 9) < ((n / 100) % 2 ? 3 : 7));
      pop  = !empty && ($urandom_range(0, 9) < ((n / 100) % 2 ? 7 : 3));
      wdata = {$urandom, $urandom, $urandom, $urandom};
      popped = pop;
      if (pop) exp = q.pop_front();
      if (push) q.push_back(wdata);
      @(posedge clk); #1;
      if (popped) check(rdata == exp, "popped data in order");
    end
    check(saw_full > 0 && saw_empty > 0, "full and empty reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
