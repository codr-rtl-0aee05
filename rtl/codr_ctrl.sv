// codr_ctrl: layer controller implementing CoDR's loop ordering.
//
// Loop nest, outermost first (the circled numbers of the paper's
// high-level architecture figure):
//   (4) output-channel groups of T_PU*T_M channels        mg
//   (3) output tile rows                                  tr
//   (2) output tile columns                               tc
//   (1) input-channel tiles of T_N channels               nt
// Output features stay in the APEs until loop (1) ends and are written
// once; the input features are read once per output-channel group.
//
// Per output tile the controller presets the APEs with their biases, then
// for every input-channel tile: fills the Input RF from the Input SRAM (one
// feature per cycle, zero outside the stored map or beyond N), then serves
// the MPEs one after another from the Weight SRAM: two header words, `go`,
// then the count, delta and index streams word by word. An MPE starts
// decoding while later MPEs are still being loaded. When every PU is idle
// the next input-channel tile starts; after the last one the APE rows are
// written to the Output SRAM.
//
// Weight SRAM layout from cfg.w_base, per output-channel group:
//   T_PU*T_M words of bias (PU-major, signed, accumulator scale), then for
//   each input-channel tile, each PU, each MPE a block:
//     {delta_words[15:0], count_words[15:0]}, {entries[15:0], index_words[15:0]},
//     count words, delta words, index words.
//   The blocks of a group are read again for every output tile.
// Input SRAM: feature (ch, row, col) at in_base + (ch*ri + row)*ci + col.
// Output SRAM: row `row` of tile (tr, tc) of channel m at
//   out_base + ((m*n_tr + tr)*n_tc + tc)*rows + row, rows = T_RO, or T_RO/2
//   with pooling; a word holds T_CO features, feature c in bits [8c+7:8c].
// All SRAM reads have one cycle of latency. The loop order is the paper's;
// memory layouts and the serial schedule are this design's choice.
module codr_ctrl
  import codr_pkg::*;
#(
  parameter int unsigned NPU = T_PU,
  parameter int unsigned NN  = T_N,
  parameter int unsigned NM  = T_M,
  parameter int unsigned RI  = T_RI,
  parameter int unsigned CI  = T_CI,
  parameter int unsigned RO  = T_RO,
  parameter int unsigned CO  = T_CO
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  layer_cfg_t                 cfg,
  output logic                       busy,
  output logic                       done,
  // Input SRAM read
  output logic                       in_re,
  output logic [AW-1:0]              in_addr,
  input  logic [DW-1:0]              in_rdata,
  // Weight SRAM read
  output logic                       w_re,
  output logic [AW-1:0]              w_addr,
  input  logic [WW-1:0]              w_rdata,
  // Output SRAM write
  output logic                       out_we,
  output logic [AW-1:0]              out_addr,
  output logic [CO*DW-1:0]           out_wdata,
  // Input RF write
  output logic                       irf_we,
  output logic [$clog2(NN)-1:0]      irf_layer,
  output logic [$clog2(RI)-1:0]      irf_row,
  output logic [$clog2(CI)-1:0]      irf_col,
  output logic [DW-1:0]              irf_data,
  // Weight RF load
  output logic [$clog2(NPU)-1:0]     wl_pu,
  output logic [$clog2(NN)-1:0]      wl_mpe,
  output logic                       wl_push,
  output stream_e                    wl_sel,
  output logic [WW-1:0]              wl_data,
  input  logic                       wl_ready,
  // MPE start
  output logic                       go,
  output logic [$clog2(NPU)-1:0]     go_pu,
  output logic [$clog2(NN)-1:0]      go_mpe,
  output logic [15:0]                entries,
  // APE control and read-out
  output logic                       ape_init,
  output logic signed [PW-1:0]       bias [NPU][NM],
  input  logic                       pu_idle [NPU],
  output logic [$clog2(NPU)-1:0]     rd_pu,
  output logic [$clog2(NM)-1:0]      rd_ape,
  output logic [$clog2(RO)-1:0]      rd_row,
  input  logic [DW-1:0]              rd_data [CO]
);
  typedef enum logic [4:0] {
    S_IDLE, S_BIAS_RD, S_BIAS_WT, S_TILE, S_IN, S_IN_END,
    S_HDR0_RD, S_HDR0_WT, S_HDR1_RD, S_HDR1_WT, S_GO, S_W_NEXT, S_W_WT,
    S_WAIT, S_SETTLE, S_DRAIN, S_NEXT, S_DONE
  } state_e;
  state_e state;

  localparam int unsigned LW = (NN > 1) ? $clog2(NN) : 1;

  logic [15:0]   mg, tr, tc, nt, n_mg, n_nt;
  logic [AW-1:0] wptr, mg_base;
  logic [15:0]   bk;                          // bias word counter
  logic [$clog2(NPU)-1:0] bpu;                // block: PU
  logic [$clog2(NN)-1:0]  bmpe;               // block: MPE
  logic [15:0]   cnt_words, dlt_words, idx_words, words_left;
  stream_e       sel;
  // Input RF fill
  logic [LW-1:0]          il;
  logic [$clog2(RI)-1:0]  ir;
  logic [$clog2(CI)-1:0]  ic;
  logic                   pend, pend_zero;
  logic [LW-1:0]          pend_l;
  logic [$clog2(RI)-1:0]  pend_r;
  logic [$clog2(CI)-1:0]  pend_c;
  // Drain
  logic [$clog2(NPU)-1:0] dpu;
  logic [$clog2(NM)-1:0]  dape;
  logic [$clog2(RO)-1:0]  drow;
  logic [$clog2(RO):0]    rows;
  logic                   all_idle;

  logic [31:0] ch_i, row_i, col_i, mglob;
  logic        in_ok;

  assign n_mg = 16'((32'(cfg.m_ch) + NPU*NM - 1) / (NPU*NM));
  assign n_nt = 16'((32'(cfg.n_ch) + NN - 1) / NN);
  assign rows = cfg.post.pool_en ? ($clog2(RO)+1)'(RO/2) : ($clog2(RO)+1)'(RO);
  assign busy = (state != S_IDLE);

  always_comb begin
    all_idle = 1'b1;
    for (int p = 0; p < int'(NPU); p++) all_idle = all_idle && pu_idle[p];
  end

  // Input RF fill addressing
  always_comb begin
    ch_i  = 32'(nt) * NN + 32'(il);
    row_i = 32'(tr) * RO * 32'(cfg.geom.stride) + 32'(ir);
    col_i = 32'(tc) * CO * 32'(cfg.geom.stride) + 32'(ic);
    in_ok = (ch_i < 32'(cfg.n_ch)) && (row_i < 32'(cfg.ri)) && (col_i < 32'(cfg.ci));
    in_re   = (state == S_IN) && in_ok;
    in_addr = AW'(32'(cfg.in_base) + (ch_i * 32'(cfg.ri) + row_i) * 32'(cfg.ci) + col_i);
    irf_we    = pend;
    irf_layer = ($clog2(NN))'(pend_l);
    irf_row   = pend_r;
    irf_col   = pend_c;
    irf_data  = pend_zero ? '0 : in_rdata;
  end

  // Weight SRAM and Weight RF
  always_comb begin
    w_re    = (state == S_BIAS_RD) || (state == S_HDR0_RD) || (state == S_HDR1_RD) ||
              ((state == S_W_NEXT) && (words_left != '0));
    w_addr  = wptr;
    wl_pu   = bpu;
    wl_mpe  = bmpe;
    wl_sel  = sel;
    wl_data = w_rdata;
    wl_push = (state == S_W_WT);
    go      = (state == S_GO);
    go_pu   = bpu;
    go_mpe  = bmpe;
    ape_init = (state == S_TILE);
  end

  // Output SRAM
  always_comb begin
    mglob     = (32'(mg) * NPU + 32'(dpu)) * NM + 32'(dape);
    rd_pu     = dpu;
    rd_ape    = dape;
    rd_row    = drow;
    out_we    = (state == S_DRAIN) && (mglob < 32'(cfg.m_ch));
    out_addr  = AW'(32'(cfg.out_base) +
                (((mglob * 32'(cfg.n_tr) + 32'(tr)) * 32'(cfg.n_tc) + 32'(tc)) * 32'(rows) + 32'(drow)));
    for (int c = 0; c < int'(CO); c++) out_wdata[c*DW +: DW] = rd_data[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      {mg, tr, tc, nt, bk} <= '0;
      wptr <= '0; mg_base <= '0;
      bpu <= '0; bmpe <= '0;
      {cnt_words, dlt_words, idx_words, words_left, entries} <= '0;
      sel <= STR_CNT;
      il <= '0; ir <= '0; ic <= '0;
      pend <= 1'b0; pend_zero <= 1'b0; pend_l <= '0; pend_r <= '0; pend_c <= '0;
      dpu <= '0; dape <= '0; drow <= '0;
      for (int p = 0; p < int'(NPU); p++)
        for (int m = 0; m < int'(NM); m++) bias[p][m] <= '0;
    end else begin
      done <= 1'b0;
      pend <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          mg <= '0; wptr <= cfg.w_base; bk <= '0;
          state <= S_BIAS_RD;
        end
        S_BIAS_RD: state <= S_BIAS_WT;
        S_BIAS_WT: begin
          bias[32'(bk) / NM][32'(bk) % NM] <= signed'(w_rdata);
          wptr <= wptr + 1'b1;
          if (32'(bk) == NPU*NM - 1) begin
            mg_base <= wptr + 1'b1;
            tr <= '0; tc <= '0;
            state <= S_TILE;
          end else begin
            bk <= bk + 1'b1;
            state <= S_BIAS_RD;
          end
        end
        S_TILE: begin
          wptr <= mg_base;
          nt <= '0;
          il <= '0; ir <= '0; ic <= '0;
          state <= S_IN;
        end
        S_IN: begin
          pend <= 1'b1; pend_zero <= !in_ok;
          pend_l <= il; pend_r <= ir; pend_c <= ic;
          if (32'(ic) == CI - 1) begin
            ic <= '0;
            if (32'(ir) == RI - 1) begin
              ir <= '0;
              if (32'(il) == NN - 1) begin
                il <= '0;
                state <= S_IN_END;
              end else il <= il + 1'b1;
            end else ir <= ir + 1'b1;
          end else ic <= ic + 1'b1;
        end
        S_IN_END: begin
          bpu <= '0; bmpe <= '0;
          state <= S_HDR0_RD;
        end
        S_HDR0_RD: state <= S_HDR0_WT;
        S_HDR0_WT: begin
          cnt_words <= w_rdata[15:0];
          dlt_words <= w_rdata[31:16];
          wptr <= wptr + 1'b1;
          state <= S_HDR1_RD;
        end
        S_HDR1_RD: state <= S_HDR1_WT;
        S_HDR1_WT: begin
          idx_words <= w_rdata[15:0];
          entries   <= w_rdata[31:16];
          wptr <= wptr + 1'b1;
          state <= S_GO;
        end
        S_GO: begin
          sel <= STR_CNT;
          words_left <= cnt_words;
          state <= S_W_NEXT;
        end
        S_W_NEXT: begin
          if (words_left != '0) state <= S_W_WT;
          else if (sel == STR_CNT) begin sel <= STR_DLT; words_left <= dlt_words; end
          else if (sel == STR_DLT) begin sel <= STR_IDX; words_left <= idx_words; end
          else if (32'(bmpe) == NN - 1 && 32'(bpu) == NPU - 1) state <= S_WAIT;
          else begin
            if (32'(bmpe) == NN - 1) begin bmpe <= '0; bpu <= bpu + 1'b1; end
            else bmpe <= bmpe + 1'b1;
            state <= S_HDR0_RD;
          end
        end
        S_W_WT: if (wl_ready) begin
          wptr <= wptr + 1'b1;
          words_left <= words_left - 1'b1;
          state <= S_W_NEXT;
        end
        S_WAIT: if (all_idle) state <= S_SETTLE;
        S_SETTLE: begin
          if (nt + 1'b1 < n_nt) begin
            nt <= nt + 1'b1;
            state <= S_IN;
          end else begin
            dpu <= '0; dape <= '0; drow <= '0;
            state <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          if (($clog2(RO)+1)'(drow) == rows - 1'b1) begin
            drow <= '0;
            if (32'(dape) == NM - 1) begin
              dape <= '0;
              if (32'(dpu) == NPU - 1) state <= S_NEXT;
              else dpu <= dpu + 1'b1;
            end else dape <= dape + 1'b1;
          end else drow <= drow + 1'b1;
        end
        S_NEXT: begin
          if (tc + 1'b1 < 16'(cfg.n_tc)) begin
            tc <= tc + 1'b1; state <= S_TILE;
          end else if (tr + 1'b1 < 16'(cfg.n_tr)) begin
            tc <= '0; tr <= tr + 1'b1; state <= S_TILE;
          end else if (mg + 1'b1 < n_mg) begin
            mg <= mg + 1'b1; bk <= '0; state <= S_BIAS_RD;   // wptr is at the next group
          end else state <= S_DONE;
        end
        S_DONE: begin
          done <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
