// codr_mpe: Multiplier Processing Element.
//
// One MPE handles one input channel of the PU's tile in a cycle of an
// Iteration. It contains the Weight RF (three compressed streams), the
// Weight Decoder, the differential MLP Array and the Selector.
//
// Operation, per cycle of the Iteration:
//  * `go` with `entries` (number of unique-weight entries, dummies
//    included) empties the Weight RF, clears the MLP accumulator and the
//    running index. Words then arrive on wl_push/wl_sel/wl_data, stream by
//    stream; decoding starts as soon as bits are there.
//  * For each entry: the decoder pops a repetition count and a delta; the
//    MLP Array adds delta x input tile to its matrix (w x I). Then, once per
//    repetition, an index is decoded, the Selector cuts out the T_RO x T_CO
//    window for that kernel position and the window is offered to the
//    interconnection network (out_valid/out_ready, out_m = destination
//    APE). Weight sparsity is implicit (zero weights are not in the
//    streams), repetition is reused (one MLP pass serves all repetitions),
//    similarity is reused (only deltas are multiplied).
//  * `done` is high once all entries are finished, until the next `go`.
// Timing: one entry costs ceil(T_RI*T_CI/LANES) + 2 cycles plus 3 cycles per
// repetition when the network accepts at once. The block structure follows
// the paper's MPE figure; the state machine and its timing are this
// design's.
module codr_mpe
  import codr_pkg::*;
#(
  parameter int unsigned RI       = T_RI,
  parameter int unsigned CI       = T_CI,
  parameter int unsigned RO       = T_RO,
  parameter int unsigned CO       = T_CO,
  parameter int unsigned NM       = T_M,
  parameter int unsigned LANES    = 16,
  parameter int unsigned WRF_BITS = 2048,
  parameter bit          LP_SIGNED = 1'b0
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      go,
  input  logic [15:0]               entries,
  input  enc_cfg_t                  enc,
  input  geom_cfg_t                 geom,
  input  logic [DW-1:0]             in_tile [RI*CI],
  input  logic                      wl_push,
  input  stream_e                   wl_sel,
  input  logic [WW-1:0]             wl_data,
  output logic                      wl_ready,
  output logic                      out_valid,
  output logic [$clog2(NM)-1:0]     out_m,
  output logic signed [MW-1:0]      out_data [RO*CO],
  input  logic                      out_ready,
  output logic                      done
);
  localparam int unsigned PEEK = 16;
  localparam int unsigned BW   = $clog2(WRF_BITS) + 1;
  localparam int unsigned PNW  = $clog2(PEEK) + 1;

  typedef enum logic [2:0] {S_DONE, S_ENTRY, S_MUL, S_IDX, S_SEL, S_SEND} state_e;
  state_e state;

  logic [15:0] left;

  // Weight RF <-> decoder
  logic [PEEK-1:0] pk_cnt, pk_dlt, pk_idx;
  logic [BW-1:0]   av_cnt, av_dlt, av_idx;
  logic            p_cnt, p_dlt, p_idx;
  logic [PNW-1:0]  pn_cnt, pn_dlt, pn_idx;

  logic                  take_entry, take_idx, entry_ok, idx_ok, rep_zero;
  logic signed [DLW-1:0] delta;
  logic [IDXW-1:0]       idx;

  logic                  mlp_done;
  logic signed [MW-1:0]  acc [RI*CI];
  logic [$clog2(NM)-1:0] sel_m;
  logic signed [MW-1:0]  sel_win [RO*CO];

  codr_weight_rf #(.DEPTH(WRF_BITS), .PEEK(PEEK)) u_wrf (
    .clk, .rst_n, .clr(go), .push(wl_push), .sel(wl_sel), .wdata(wl_data), .ready(wl_ready),
    .peek_cnt(pk_cnt), .peek_dlt(pk_dlt), .peek_idx(pk_idx),
    .avail_cnt(av_cnt), .avail_dlt(av_dlt), .avail_idx(av_idx),
    .pop_cnt(p_cnt), .pop_dlt(p_dlt), .pop_idx(p_idx),
    .pop_n_cnt(pn_cnt), .pop_n_dlt(pn_dlt), .pop_n_idx(pn_idx));

  codr_weight_decoder #(.LP_SIGNED(LP_SIGNED), .PEEK(PEEK), .BW(BW)) u_dec (
    .clk, .rst_n, .clr(go), .enc,
    .peek_cnt(pk_cnt), .peek_dlt(pk_dlt), .peek_idx(pk_idx),
    .avail_cnt(av_cnt), .avail_dlt(av_dlt), .avail_idx(av_idx),
    .pop_cnt(p_cnt), .pop_dlt(p_dlt), .pop_idx(p_idx),
    .pop_n_cnt(pn_cnt), .pop_n_dlt(pn_dlt), .pop_n_idx(pn_idx),
    .take_entry, .take_idx, .entry_ok, .delta, .idx_ok, .idx, .rep_zero);

  codr_mlp_array #(.E(RI*CI), .LANES(LANES)) u_mlp (
    .clk, .rst_n, .clr(go), .start(take_entry), .delta, .in_tile,
    .acc, .busy(), .done(mlp_done));

  codr_selector #(.RI(RI), .CI(CI), .RO(RO), .CO(CO), .NM(NM)) u_sel (
    .idx, .geom, .acc, .m(sel_m), .win(sel_win));

  assign take_entry = (state == S_ENTRY) && (left != '0) && entry_ok;
  assign take_idx   = (state == S_IDX) && !rep_zero && idx_ok;
  assign done       = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_DONE;
      left      <= '0;
      out_valid <= 1'b0;
      out_m     <= '0;
      for (int e = 0; e < int'(RO*CO); e++) out_data[e] <= '0;
    end else if (go) begin
      state     <= S_ENTRY;
      left      <= entries;
      out_valid <= 1'b0;
    end else begin
      unique case (state)
        S_DONE: ;
        S_ENTRY: begin
          if (left == '0) state <= S_DONE;
          else if (entry_ok) begin
            left  <= left - 1'b1;
            state <= S_MUL;
          end
        end
        S_MUL:  if (mlp_done) state <= S_IDX;
        S_IDX: begin
          if (rep_zero) state <= S_ENTRY;
          else if (idx_ok) state <= S_SEL;
        end
        S_SEL: begin            // index register now holds the new index
          out_valid <= 1'b1;
          out_m     <= sel_m;
          out_data  <= sel_win;
          state     <= S_SEND;
        end
        S_SEND: begin
          if (out_ready) begin
            out_valid <= 1'b0;
            state     <= S_IDX;
          end
        end
        default: state <= S_DONE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (out_valid && !out_ready && !go) |=> out_valid)
    else $error("codr_mpe: window withdrawn before it was accepted");
endmodule
