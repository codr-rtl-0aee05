// codr_ape: Accumulator Processing Element.
//
// Owns one output channel of the PU during an Iteration. Its Output RF holds
// T_RO x T_CO partial sums. `init` presets every entry to `bias`; each
// acc_valid cycle adds a window of partial products (from any MPE, through
// the interconnection network) entry by entry: the matrix-matrix adder.
// The registered sums are post-processed by codr_pool_af; the controller
// reads the resulting 8-bit features one tile row (T_CO features) at a time
// through rd_row / rd_data, combinationally. The adder, Output RF and
// "Pooling & AF" stages are the paper's; presetting with the bias is this
// design's choice.
module codr_ape
  import codr_pkg::*;
#(
  parameter int unsigned RO = T_RO,
  parameter int unsigned CO = T_CO
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       init,
  input  logic signed [PW-1:0]       bias,
  input  logic                       acc_valid,
  input  logic signed [MW-1:0]       acc_data [RO*CO],
  input  post_cfg_t                  post,
  input  logic [$clog2(RO)-1:0]      rd_row,
  output logic [DW-1:0]              rd_data [CO]
);
  logic signed [PW-1:0] orf  [RO*CO];
  logic [DW-1:0]        feat [RO*CO];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < int'(RO*CO); e++) orf[e] <= '0;
    end else if (init) begin
      for (int e = 0; e < int'(RO*CO); e++) orf[e] <= bias;
    end else if (acc_valid) begin
      for (int e = 0; e < int'(RO*CO); e++) orf[e] <= orf[e] + PW'(acc_data[e]);
    end
  end

  codr_pool_af #(.RO(RO), .CO(CO)) u_post (.tile(orf), .cfg(post), .feat(feat));

  always_comb begin
    for (int c = 0; c < int'(CO); c++) rd_data[c] = feat[int'(rd_row)*int'(CO) + c];
  end
endmodule
