// codr_pkg: sizes, types and helpers shared by the CoDR accelerator RTL.
//
// The tiling numbers are the main configuration of the accelerator: 8
// processing units, each working on T_N = 4 input channels and T_M = 4
// output channels, with 8 x 8 output tiles computed from 20 x 20 input tiles.
// Features and weights are 8-bit fixed point. The word widths of the SRAMs,
// the accumulator widths and the layer configuration record are this
// design's own choices.
package codr_pkg;

  // Tiling (main configuration)
  localparam int unsigned T_PU = 8;
  localparam int unsigned T_M  = 4;
  localparam int unsigned T_N  = 4;
  localparam int unsigned T_RO = 8;
  localparam int unsigned T_CO = 8;
  localparam int unsigned T_RI = 20;
  localparam int unsigned T_CI = 20;

  // Data widths
  localparam int unsigned DW  = 8;   // feature and weight bits
  localparam int unsigned DLW = 9;   // decoded weight delta (signed)
  localparam int unsigned MW  = 16;  // MLP Array accumulator (holds w x I)
  localparam int unsigned PW  = 32;  // APE Output RF partial sums
  localparam int unsigned WW  = 32;  // Weight SRAM word
  localparam int unsigned AW  = 20;  // SRAM address width at the top
  localparam int unsigned IDXW = 12; // index register width
  localparam int unsigned KW  = 4;   // kernel size field, 1..15

  // Weight RF stream selectors
  typedef enum logic [1:0] {
    STR_CNT = 2'd0,   // repetition counts
    STR_DLT = 2'd1,   // unique weight deltas
    STR_IDX = 2'd2    // indexes
  } stream_e;

  // Per-layer RLE bit-lengths, chosen offline by the encoder.
  typedef struct packed {
    logic [3:0] cnt_bits;   // repetition count field
    logic [3:0] wlp_bits;   // low-precision delta field (high precision is 8)
    logic [3:0] ilp_bits;   // delta index field
    logic [3:0] iabs_bits;  // absolute index field
  } enc_cfg_t;

  // Kernel geometry seen by the Selector.
  typedef struct packed {
    logic [KW-1:0] rk;
    logic [KW-1:0] ck;
    logic [2:0]    stride;
  } geom_cfg_t;

  // Post-processing in the APE.
  typedef struct packed {
    logic       relu_en;
    logic       pool_en;   // 2x2 max pooling, stride 2, inside the tile
    logic [4:0] shift;     // arithmetic right shift before saturation
  } post_cfg_t;

  // Everything the controller needs for one convolutional layer.
  typedef struct packed {
    logic [15:0]   n_ch;     // input channels N
    logic [15:0]   m_ch;     // output channels M
    logic [15:0]   ri;       // input rows stored in the Input SRAM
    logic [15:0]   ci;       // input columns stored in the Input SRAM
    logic [7:0]    n_tr;     // output tile rows    (R_O / T_RO, rounded up)
    logic [7:0]    n_tc;     // output tile columns (C_O / T_CO, rounded up)
    geom_cfg_t     geom;
    enc_cfg_t      enc;
    post_cfg_t     post;
    logic [AW-1:0] in_base;
    logic [AW-1:0] w_base;
    logic [AW-1:0] out_base;
  } layer_cfg_t;

  // Weight delta decode: low-precision code is {field, 1'b1}, high-precision
  // code is {8-bit two's complement, 1'b0}; the code sits at bit 0 of the
  // stream.
  function automatic logic signed [DLW-1:0] dec_delta(input logic [15:0] bits,
                                                     input logic [3:0] lp,
                                                     input bit lp_signed);
    logic signed [DLW-1:0] v;
    logic [15:0] f;
    if (bits[0]) begin
      f = (bits >> 1) & ((16'd1 << lp) - 16'd1);
      v = DLW'(f);
      if (lp_signed && lp != 0 && f[lp-1]) v = DLW'(f) - DLW'(1 << lp);
    end else begin
      v = DLW'(signed'(bits[8:1]));
    end
    return v;
  endfunction

  function automatic logic [4:0] delta_len(input logic [15:0] bits, input logic [3:0] lp);
    return bits[0] ? 5'(lp) + 5'd1 : 5'd9;
  endfunction

endpackage
