// tpu_control -- sequencer for one matrix multiply on the systolic array.
//
// One command computes P = W * X on the ROWS x COLS array, where X is K
// activation vectors (each COLS wide) stored at act_base.. in the unified
// buffer and W arrives as K weight vectors (each ROWS wide) through the
// weight FIFO.  The sequence is:
//   CLEAR  two cycles: clear all accumulators (first cycle) and the sticky
//          partition fail flags (both cycles, so a stale Razor flag of the
//          previous command cannot leak into this one);
//   STREAM for k = 0..K-1 read X[k] from the buffer and pop W[:,k] from the
//          FIFO in the same cycle.  If the FIFO is empty the controller
//          stalls: it issues nothing that cycle, the array receives a zero
//          bubble on both operand streams (which keeps them aligned) and k
//          does not advance;
//   FLUSH  ROWS+COLS+1 cycles of zeros so the last wavefront reaches the
//          far corner of the array;
//   DRAIN  write the results row by row back to the buffer at res_base, each
//          result row taking ACC_W/DATA_W consecutive words, lowest columns
//          in the first word, column 0 in the low bits;
//   CALIB  if calib_en, pulse vstep: the runtime scheme takes one voltage
//          step from the failures seen during this command (a "trial run"
//          in the paper's words);
//   DONE   done pulses for one cycle.
// The paper only names the TPU's control blocks; this sequence is this
// design's choice.  Operand vectors are gated: act_vec/wgt_vec are the
// buffer and FIFO read data in the cycle after an issue, zero otherwise.
// Requires ACC_W to be a multiple of DATA_W and COLS*DATA_W buffer words.
module tpu_control #(
  parameter int unsigned ROWS   = tpu_pkg::ROWS,
  parameter int unsigned COLS   = tpu_pkg::COLS,
  parameter int unsigned DATA_W = tpu_pkg::DATA_W,
  parameter int unsigned ACC_W  = tpu_pkg::ACC_W,
  parameter int unsigned AW     = 8,
  parameter int unsigned KW     = 8
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  // command
  input  logic                                  start,
  input  logic [AW-1:0]                         act_base,
  input  logic [KW-1:0]                         k_len,
  input  logic [AW-1:0]                         res_base,
  input  logic                                  calib_en,
  output logic                                  busy,
  output logic                                  done,
  output logic                                  stall,
  // weight FIFO
  input  logic                                  fifo_empty,
  output logic                                  fifo_pop,
  input  logic [ROWS-1:0][DATA_W-1:0]           fifo_rdata,
  // unified buffer port B
  output logic                                  ub_we,
  output logic [AW-1:0]                         ub_addr,
  output logic [COLS*DATA_W-1:0]                ub_wdata,
  input  logic [COLS-1:0][DATA_W-1:0]           ub_rdata,
  // array
  output logic                                  arr_clr,
  output logic [COLS-1:0][DATA_W-1:0]           act_vec,
  output logic [ROWS-1:0][DATA_W-1:0]           wgt_vec,
  input  logic [ROWS-1:0][COLS-1:0][ACC_W-1:0]  y,
  // voltage scaling
  output logic                                  mon_clear,
  output logic                                  vstep
);

  localparam int unsigned RES_WORDS = ACC_W / DATA_W;        // words per result row
  localparam int unsigned CPW       = COLS / RES_WORDS;      // results per word
  localparam int unsigned FLUSH_CYC = ROWS + COLS + 1;
  localparam int unsigned DRAIN_N   = ROWS * RES_WORDS;
  localparam int unsigned CW        = $clog2(FLUSH_CYC + DRAIN_N + 1) + 1;

  typedef enum logic [2:0] {
    S_IDLE, S_CLEAR, S_STREAM, S_FLUSH, S_DRAIN, S_CALIB, S_DONE
  } state_t;

  state_t          state;
  logic [KW-1:0]   k;
  logic [CW-1:0]   cnt;
  logic            issue, issue_q;
  logic [AW-1:0]   act_base_q, res_base_q;
  logic [KW-1:0]   k_len_q;
  logic            calib_q;

  // drain position
  logic [CW-1:0]   drow, dword;
  assign drow  = cnt / CW'(RES_WORDS);
  assign dword = cnt % CW'(RES_WORDS);

  assign issue = (state == S_STREAM) && !fifo_empty && (k < k_len_q);
  assign stall = (state == S_STREAM) && fifo_empty && (k < k_len_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      k          <= '0;
      cnt        <= '0;
      issue_q    <= 1'b0;
      act_base_q <= '0;
      res_base_q <= '0;
      k_len_q    <= '0;
      calib_q    <= 1'b0;
    end else begin
      issue_q <= issue;
      unique case (state)
        S_IDLE: if (start) begin
          act_base_q <= act_base;
          res_base_q <= res_base;
          k_len_q    <= k_len;
          calib_q    <= calib_en;
          k          <= '0;
          cnt        <= '0;
          state      <= S_CLEAR;
        end
        S_CLEAR: begin
          cnt <= cnt + 1'b1;
          if (cnt == CW'(1)) begin
            cnt   <= '0;
            state <= S_STREAM;
          end
        end
        S_STREAM: begin
          if (issue) k <= k + 1'b1;
          if (k == k_len_q || (issue && k == k_len_q - 1'b1)) begin
            cnt   <= '0;
            state <= S_FLUSH;
          end
        end
        S_FLUSH: begin
          cnt <= cnt + 1'b1;
          if (cnt == CW'(FLUSH_CYC - 1)) begin
            cnt   <= '0;
            state <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          cnt <= cnt + 1'b1;
          if (cnt == CW'(DRAIN_N - 1)) begin
            cnt   <= '0;
            state <= S_CALIB;
          end
        end
        S_CALIB: state <= S_DONE;
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // outputs
  always_comb begin
    busy      = (state != S_IDLE);
    done      = (state == S_DONE);
    arr_clr   = (state == S_CLEAR) && (cnt == '0);
    mon_clear = (state == S_CLEAR);
    vstep     = (state == S_CALIB) && calib_q;
    fifo_pop  = issue;
    ub_we     = (state == S_DRAIN);
    ub_addr   = '0;
    ub_wdata  = '0;
    if (state == S_DRAIN) begin
      ub_addr = res_base_q + AW'(cnt);
      for (int c = 0; c < CPW; c++)
        ub_wdata[c*ACC_W +: ACC_W] = y[drow][dword*CPW + c];
    end else begin
      ub_addr = act_base_q + AW'(k);
    end
    act_vec = issue_q ? ub_rdata   : '0;
    wgt_vec = issue_q ? fifo_rdata : '0;
  end

endmodule
