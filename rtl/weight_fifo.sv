// weight_fifo -- queue of weight vectors between off-chip memory and the array.
//
// A synchronous first-in first-out queue of DEPTH entries of WIDTH bits
// (one weight column: one weight per array row).  push writes wdata when
// not full; pop removes the oldest entry when not empty and presents it on
// rdata one clk later (registered read, matching the unified buffer's read
// latency so both operand streams stay aligned).  Push and pop may happen in
// the same cycle.  A push while full or a pop while empty is ignored and is
// also flagged by an assertion.  The paper only names the "Weight FIFO
// (Weight Fetcher)"; depth and handshake are this design's choices.
module weight_fifo #(
  parameter int unsigned WIDTH = tpu_pkg::ROWS * tpu_pkg::DATA_W,
  parameter int unsigned DEPTH = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] wdata,
  output logic             full,
  input  logic             pop,
  output logic [WIDTH-1:0] rdata,
  output logic             empty,
  output logic [$clog2(DEPTH):0] count
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             do_push, do_pop;

  assign full    = (count == (AW+1)'(DEPTH));
  assign empty   = (count == '0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
      rdata  <= '0;
    end else begin
      if (do_push) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (do_pop) begin
        rdata  <= mem[rd_ptr];
        rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      end
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $error("weight_fifo: push while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("weight_fifo: pop while empty");

endmodule
