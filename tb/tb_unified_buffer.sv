// tb_unified_buffer -- self-checking test of the dual-port buffer.
//
// Random reads and writes on both ports against an associative-array model;
// read data must appear one cycle after the address and give the word as it
// was before a write in the same cycle; a same-address write on both ports
// must leave port B's data.
module tb_unified_buffer;
  localparam int W = 128, D = 256, AW = 8;
  logic clk = 1'b0;
  logic a_we = 1'b0, b_we = 1'b0;
  logic [AW-1:0] a_addr = '0, b_addr = '0;
  logic [W-1:0] a_wdata = '0, b_wdata = '0, a_rdata, b_rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0, collisions = 0;

  unified_buffer #(.WIDTH(W), .DEPTH(D)) dut (.clk, .a_we, .a_addr, .a_wdata, .a_rdata,
    .b_we, .b_addr, .b_wdata, .b_rdata);

  initial forever #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic logic [W-1:0] rnd();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    logic [W-1:0] ea, eb;
    // fill through both ports
    for (int i = 0; i < D; i += 2) begin
      @(negedge clk);
      a_we = 1; a_addr = AW'(i);   a_wdata = rnd(); model[i]   = a_wdata;
      b_we = 1; b_addr = AW'(i+1); b_wdata = rnd(); model[i+1] = b_wdata;
    end
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      a_we = $urandom_range(0, 1); b_we = $urandom_range(0, 1);
      a_addr = AW'($urandom_range(0, 15)); b_addr = AW'($urandom_range(0, 15));
      a_wdata = rnd(); b_wdata = rnd();
      ea = model[a_addr]; eb = model[b_addr];
      if (a_we) model[a_addr] = a_wdata;
      if (b_we) model[b_addr] = b_wdata;
      if (a_we && b_we && a_addr == b_addr) collisions++;
      @(posedge clk); #1;
      check(a_rdata == ea, "port A read");
      check(b_rdata == eb, "port B read");
    end
    check(collisions > 0, "write collision exercised");
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
