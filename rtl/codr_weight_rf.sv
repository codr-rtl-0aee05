// codr_weight_rf: Weight Register File of one MPE.
//
// Holds the three compressed structures of the MPE's weight vector: the
// repetition counts, the unique weight deltas and the indexes. Each is a
// bit stream (codr_bit_fifo) loaded word by word from the Weight SRAM:
// `push` with `sel` (a stream_e) appends one WW-bit word to that stream when
// `ready` is high. The Weight Decoder reads the oldest bits of each stream on
// peek_* and consumes a variable number of them with pop_* / pop_n_*. `clr`
// empties all three streams. The three structures and their names follow the
// paper; their capacity (DEPTH bits each) is this design's choice.
module codr_weight_rf
  import codr_pkg::*;
#(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned PEEK  = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clr,
  input  logic                   push,
  input  stream_e                sel,
  input  logic [WW-1:0]          wdata,
  output logic                   ready,
  output logic [PEEK-1:0]        peek_cnt,  peek_dlt,  peek_idx,
  output logic [$clog2(DEPTH):0] avail_cnt, avail_dlt, avail_idx,
  input  logic                   pop_cnt,   pop_dlt,   pop_idx,
  input  logic [$clog2(PEEK):0]  pop_n_cnt, pop_n_dlt, pop_n_idx
);
  logic rdy_cnt, rdy_dlt, rdy_idx;

  codr_bit_fifo #(.DEPTH(DEPTH), .WW(WW), .PEEK(PEEK)) u_cnt (
    .clk, .rst_n, .clr, .push(push && sel == STR_CNT), .wdata, .ready(rdy_cnt),
    .peek(peek_cnt), .avail(avail_cnt), .pop(pop_cnt), .pop_n(pop_n_cnt));
  codr_bit_fifo #(.DEPTH(DEPTH), .WW(WW), .PEEK(PEEK)) u_dlt (
    .clk, .rst_n, .clr, .push(push && sel == STR_DLT), .wdata, .ready(rdy_dlt),
    .peek(peek_dlt), .avail(avail_dlt), .pop(pop_dlt), .pop_n(pop_n_dlt));
  codr_bit_fifo #(.DEPTH(DEPTH), .WW(WW), .PEEK(PEEK)) u_idx (
    .clk, .rst_n, .clr, .push(push && sel == STR_IDX), .wdata, .ready(rdy_idx),
    .peek(peek_idx), .avail(avail_idx), .pop(pop_idx), .pop_n(pop_n_idx));

  always_comb begin
    unique case (sel)
      STR_CNT: ready = rdy_cnt;
      STR_DLT: ready = rdy_dlt;
      STR_IDX: ready = rdy_idx;
      default: ready = 1'b0;
    endcase
  end
endmodule
