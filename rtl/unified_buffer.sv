// unified_buffer -- on-chip activation and result storage of the TPU.
//
// A simple dual-port memory of DEPTH words of WIDTH bits.  Port A serves the
// host side and port B the array controller; each port can read or write one
// word per clk, and reads return the word one clk after the address (a
// registered read, as in FPGA block RAM).  A write and a read of the same
// address on one port return the old word.  When both ports write the same
// address in the same cycle, port B wins.  The paper only names the "Unified
// Buffer (Local Activation Storage)"; width, depth and port arrangement are
// this design's choices.  A word holds one activation vector (COLS operands)
// or a slice of one result row.
module unified_buffer #(
  parameter int unsigned WIDTH = tpu_pkg::COLS * tpu_pkg::DATA_W,
  parameter int unsigned DEPTH = 256,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  // port A (host)
  input  logic             a_we,
  input  logic [AW-1:0]    a_addr,
  input  logic [WIDTH-1:0] a_wdata,
  output logic [WIDTH-1:0] a_rdata,
  // port B (array controller)
  input  logic             b_we,
  input  logic [AW-1:0]    b_addr,
  input  logic [WIDTH-1:0] b_wdata,
  output logic [WIDTH-1:0] b_rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_we && !(b_we && b_addr == a_addr)) mem[a_addr] <= a_wdata;
    if (b_we) mem[b_addr] <= b_wdata;
    a_rdata <= mem[a_addr];
    b_rdata <= mem[b_addr];
  end

endmodule
