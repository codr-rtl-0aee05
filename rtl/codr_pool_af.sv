// codr_pool_af: pooling and activation-function logic of an APE.
//
// Post-processes a finished T_RO x T_CO output tile of partial sums:
//  1. activation: ReLU when cfg.relu_en, identity otherwise;
//  2. pooling: when cfg.pool_en, 2x2 max pooling with stride 2 inside the
//     tile; the (T_RO/2) x (T_CO/2) result occupies the top-left corner of
//     `feat` (row-major with row pitch T_CO) and the rest is zero;
//  3. requantization to 8-bit features: arithmetic shift right by cfg.shift,
//     then saturation to [-128, 127].
// Purely combinational. The paper only names "Pooling & AF"; the choice of
// ReLU, 2x2 max pooling and shift-and-saturate is this design's.
module codr_pool_af
  import codr_pkg::*;
#(
  parameter int unsigned RO = T_RO,
  parameter int unsigned CO = T_CO
) (
  input  logic signed [PW-1:0] tile [RO*CO],
  input  post_cfg_t            cfg,
  output logic [DW-1:0]        feat [RO*CO]
);
  function automatic logic [DW-1:0] sat(input logic signed [PW-1:0] x, input logic [4:0] sh);
    logic signed [PW-1:0] y;
    y = x >>> sh;
    if (y > PW'(signed'(8'sd127)))       return 8'h7f;
    else if (y < -PW'(128))              return 8'h80;
    else                                 return y[DW-1:0];
  endfunction

  logic signed [PW-1:0] act  [RO*CO];
  logic signed [PW-1:0] pool [RO*CO];

  always_comb begin
    for (int e = 0; e < int'(RO*CO); e++)
      act[e] = (cfg.relu_en && tile[e] < 0) ? '0 : tile[e];
    for (int e = 0; e < int'(RO*CO); e++) pool[e] = act[e];
    if (cfg.pool_en) begin
      for (int e = 0; e < int'(RO*CO); e++) pool[e] = '0;
      for (int r = 0; r < int'(RO/2); r++) begin
        for (int c = 0; c < int'(CO/2); c++) begin
          automatic logic signed [PW-1:0] a = act[(2*r)*CO + 2*c];
          automatic logic signed [PW-1:0] b = act[(2*r)*CO + 2*c + 1];
          automatic logic signed [PW-1:0] p = act[(2*r+1)*CO + 2*c];
          automatic logic signed [PW-1:0] q = act[(2*r+1)*CO + 2*c + 1];
          automatic logic signed [PW-1:0] m1 = (a > b) ? a : b;
          automatic logic signed [PW-1:0] m2 = (p > q) ? p : q;
          pool[r*CO + c] = (m1 > m2) ? m1 : m2;
        end
      end
    end
    for (int e = 0; e < int'(RO*CO); e++) feat[e] = sat(pool[e], cfg.shift);
  end
endmodule
