// codr_top: the CoDR CNN accelerator for one convolutional layer.
//
// Blocks: Input SRAM, Weight SRAM and Output SRAM; the Input RF shared by
// all processing units; T_PU processing units (each T_N MPEs, a crossbar
// and T_M APEs); and the controller that runs the input/output stationary
// loop nest. Layer i of the Input RF goes to MPE i of every PU, and the
// controller loads the Weight RFs of the MPEs from the Weight SRAM.
//
// Use: write the feature map into the Input SRAM and the compressed weights
// and biases into the Weight SRAM through the host ports while idle, drive
// `cfg`, pulse `start`, wait for `done`, then read the Output SRAM (data one
// cycle after host_out_re). Layouts are described in codr_ctrl. The host
// ports stand in for the DRAM side, which the paper does not design.
// Sizes: 125 kB Input SRAM, 200 kB Weight SRAM, 125 kB Output SRAM.
module codr_top
  import codr_pkg::*;
#(
  parameter int unsigned NPU       = T_PU,
  parameter int unsigned NN        = T_N,
  parameter int unsigned NM        = T_M,
  parameter int unsigned RI        = T_RI,
  parameter int unsigned CI        = T_CI,
  parameter int unsigned RO        = T_RO,
  parameter int unsigned CO        = T_CO,
  parameter int unsigned LANES     = 16,
  parameter int unsigned WRF_BITS  = 2048,
  parameter int unsigned IN_WORDS  = 128000,
  parameter int unsigned W_WORDS   = 51200,
  parameter int unsigned OUT_WORDS = 16000
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  layer_cfg_t           cfg,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  input  logic                 host_in_we,
  input  logic [AW-1:0]        host_in_addr,
  input  logic [DW-1:0]        host_in_wdata,
  input  logic                 host_w_we,
  input  logic [AW-1:0]        host_w_addr,
  input  logic [WW-1:0]        host_w_wdata,
  input  logic                 host_out_re,
  input  logic [AW-1:0]        host_out_addr,
  output logic [CO*DW-1:0]     host_out_rdata
);
  logic                   in_re, w_re, out_we;
  logic [AW-1:0]          in_addr, w_addr, out_addr;
  logic [DW-1:0]          in_rdata;
  logic [WW-1:0]          w_rdata;
  logic [CO*DW-1:0]       out_wdata;

  logic                   irf_we;
  logic [$clog2(NN)-1:0]  irf_layer;
  logic [$clog2(RI)-1:0]  irf_row;
  logic [$clog2(CI)-1:0]  irf_col;
  logic [DW-1:0]          irf_data;
  logic [DW-1:0]          tile [NN][RI*CI];

  logic [$clog2(NPU)-1:0] wl_pu, go_pu, rd_pu;
  logic [$clog2(NN)-1:0]  wl_mpe, go_mpe;
  logic                   wl_push, wl_ready, go, ape_init;
  stream_e                wl_sel;
  logic [WW-1:0]          wl_data;
  logic [15:0]            entries;
  logic signed [PW-1:0]   bias [NPU][NM];
  logic                   pu_idle [NPU];
  logic                   pu_wrdy [NPU];
  logic [$clog2(NM)-1:0]  rd_ape;
  logic [$clog2(RO)-1:0]  rd_row;
  logic [DW-1:0]          pu_rd [NPU][CO];
  logic [DW-1:0]          rd_data [CO];

  codr_sram #(.WORDS(IN_WORDS), .WIDTH(DW), .AW(AW)) u_in_sram (
    .clk, .we(host_in_we && !busy), .waddr(host_in_addr), .wdata(host_in_wdata),
    .re(in_re), .raddr(in_addr), .rdata(in_rdata));

  codr_sram #(.WORDS(W_WORDS), .WIDTH(WW), .AW(AW)) u_w_sram (
    .clk, .we(host_w_we && !busy), .waddr(host_w_addr), .wdata(host_w_wdata),
    .re(w_re), .raddr(w_addr), .rdata(w_rdata));

  codr_sram #(.WORDS(OUT_WORDS), .WIDTH(CO*DW), .AW(AW)) u_out_sram (
    .clk, .we(out_we), .waddr(out_addr), .wdata(out_wdata),
    .re(host_out_re), .raddr(host_out_addr), .rdata(host_out_rdata));

  codr_input_rf #(.N_L(NN), .R(RI), .C(CI)) u_irf (
    .clk, .rst_n, .we(irf_we), .layer(irf_layer), .row(irf_row), .col(irf_col),
    .wdata(irf_data), .tile);

  codr_ctrl #(.NPU(NPU), .NN(NN), .NM(NM), .RI(RI), .CI(CI), .RO(RO), .CO(CO)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .in_re, .in_addr, .in_rdata, .w_re, .w_addr, .w_rdata,
    .out_we, .out_addr, .out_wdata,
    .irf_we, .irf_layer, .irf_row, .irf_col, .irf_data,
    .wl_pu, .wl_mpe, .wl_push, .wl_sel, .wl_data, .wl_ready,
    .go, .go_pu, .go_mpe, .entries, .ape_init, .bias, .pu_idle,
    .rd_pu, .rd_ape, .rd_row, .rd_data);

  for (genvar p = 0; p < NPU; p++) begin : g_pu
    codr_pu #(.NN(NN), .NM(NM), .RI(RI), .CI(CI), .RO(RO), .CO(CO),
              .LANES(LANES), .WRF_BITS(WRF_BITS)) u_pu (
      .clk, .rst_n, .enc(cfg.enc), .geom(cfg.geom), .post(cfg.post), .in_tile(tile),
      .wl_mpe, .wl_push(wl_push && wl_pu == ($clog2(NPU))'(p)), .wl_sel, .wl_data,
      .wl_ready(pu_wrdy[p]),
      .go(go && go_pu == ($clog2(NPU))'(p)), .go_mpe, .entries,
      .ape_init, .bias(bias[p]), .rd_ape, .rd_row, .rd_data(pu_rd[p]), .idle(pu_idle[p]));
  end

  always_comb begin
    wl_ready = pu_wrdy[wl_pu];
    rd_data  = pu_rd[rd_pu];
  end
endmodule
