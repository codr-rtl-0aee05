// codr_pu: Processing Unit.
//
// T_N MPEs feed T_M APEs through the interconnection network. In a cycle
// of an Iteration MPE i works on input channel i of the tile (layer i of
// the shared Input RF); APE j accumulates output channel j over the whole
// Iteration, so a PU produces T_M output tiles of T_RO x T_CO features.
//
// Interface (all driven by the controller):
//  * wl_mpe, wl_push, wl_sel, wl_data / wl_ready: load a word into a stream
//    of the Weight RF of MPE wl_mpe;
//  * go, go_mpe, entries: start MPE go_mpe with its entry count;
//  * ape_init, bias[]: preset each APE's Output RF with its bias;
//  * rd_ape, rd_row / rd_data: read a post-processed row of an APE;
//  * idle: every MPE is done and no window is waiting in the network.
//    An APE adds a window in the cycle after the network passes it, so the
//    sums are complete one cycle after idle rises.
// Structure as in the paper's PU figure; the control interface is this
// design's.
module codr_pu
  import codr_pkg::*;
#(
  parameter int unsigned NN       = T_N,
  parameter int unsigned NM       = T_M,
  parameter int unsigned RI       = T_RI,
  parameter int unsigned CI       = T_CI,
  parameter int unsigned RO       = T_RO,
  parameter int unsigned CO       = T_CO,
  parameter int unsigned LANES    = 16,
  parameter int unsigned WRF_BITS = 2048
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  enc_cfg_t                   enc,
  input  geom_cfg_t                  geom,
  input  post_cfg_t                  post,
  input  logic [DW-1:0]              in_tile [NN][RI*CI],
  input  logic [$clog2(NN)-1:0]      wl_mpe,
  input  logic                       wl_push,
  input  stream_e                    wl_sel,
  input  logic [WW-1:0]              wl_data,
  output logic                       wl_ready,
  input  logic                       go,
  input  logic [$clog2(NN)-1:0]      go_mpe,
  input  logic [15:0]                entries,
  input  logic                       ape_init,
  input  logic signed [PW-1:0]       bias [NM],
  input  logic [$clog2(NM)-1:0]      rd_ape,
  input  logic [$clog2(RO)-1:0]      rd_row,
  output logic [DW-1:0]              rd_data [CO],
  output logic                       idle
);
  logic                      m_valid [NN];
  logic [$clog2(NM)-1:0]     m_dst   [NN];
  logic signed [MW-1:0]      m_data  [NN][RO*CO];
  logic                      m_ready [NN];
  logic                      m_done  [NN];
  logic                      m_wrdy  [NN];
  logic                      a_valid [NM];
  logic signed [MW-1:0]      a_data  [NM][RO*CO];
  logic [DW-1:0]             a_rd    [NM][CO];

  for (genvar i = 0; i < NN; i++) begin : g_mpe
    codr_mpe #(.RI(RI), .CI(CI), .RO(RO), .CO(CO), .NM(NM), .LANES(LANES), .WRF_BITS(WRF_BITS)) u_mpe (
      .clk, .rst_n,
      .go(go && go_mpe == ($clog2(NN))'(i)), .entries, .enc, .geom,
      .in_tile(in_tile[i]),
      .wl_push(wl_push && wl_mpe == ($clog2(NN))'(i)), .wl_sel, .wl_data, .wl_ready(m_wrdy[i]),
      .out_valid(m_valid[i]), .out_m(m_dst[i]), .out_data(m_data[i]), .out_ready(m_ready[i]),
      .done(m_done[i]));
  end

  codr_interconnect #(.NS(NN), .ND(NM), .NE(RO*CO)) u_icn (
    .clk, .rst_n, .in_valid(m_valid), .in_m(m_dst), .in_data(m_data), .in_ready(m_ready),
    .out_valid(a_valid), .out_data(a_data));

  for (genvar j = 0; j < NM; j++) begin : g_ape
    codr_ape #(.RO(RO), .CO(CO)) u_ape (
      .clk, .rst_n, .init(ape_init), .bias(bias[j]),
      .acc_valid(a_valid[j]), .acc_data(a_data[j]), .post,
      .rd_row, .rd_data(a_rd[j]));
  end

  always_comb begin
    idle     = 1'b1;
    for (int i = 0; i < int'(NN); i++) idle = idle && m_done[i] && !m_valid[i];
    wl_ready = m_wrdy[wl_mpe];
    rd_data  = a_rd[rd_ape];
  end
endmodule
