// codr_selector: picks the partial results belonging to one weight repetition.
//
// An index numbers the linearized weights of the MPE's input channel:
// idx = m*RK*CK + kr*CK + kc + 1, output channel m of the tile first, then
// kernel row kr, then kernel column kc. The selector turns the index into
// (m, kr, kc) and takes from the MLP results (a T_RI x T_CI matrix of w x I)
// the T_RO x T_CO window whose element (r, c) is result (kr + r*stride,
// kc + c*stride): the scalar-matrix form of a convolution. m selects the
// destination APE. Purely combinational. The index order follows the
// paper's linearized weights; the stride handling is this design's own,
// and out-of-range positions read as zero.
module codr_selector
  import codr_pkg::*;
#(
  parameter int unsigned RI   = T_RI,
  parameter int unsigned CI   = T_CI,
  parameter int unsigned RO   = T_RO,
  parameter int unsigned CO   = T_CO,
  parameter int unsigned NM   = T_M,
  parameter int unsigned MAXK = 15
) (
  input  logic [IDXW-1:0]        idx,
  input  geom_cfg_t              geom,
  input  logic signed [MW-1:0]   acc [RI*CI],
  output logic [$clog2(NM)-1:0]  m,
  output logic signed [MW-1:0]   win [RO*CO]
);
  logic [IDXW-1:0] i0, kk, pos;
  logic [KW-1:0]   kr, kc;

  // Division by the run-time kernel size done as compare chains.
  always_comb begin
    i0  = idx - 1'b1;
    kk  = IDXW'(geom.rk) * IDXW'(geom.ck);
    m   = '0;
    for (int j = 1; j < int'(NM); j++)
      if (i0 >= IDXW'(j) * kk) m = ($clog2(NM))'(j);
    pos = i0 - IDXW'(m) * kk;
    kr  = '0;
    for (int j = 1; j <= int'(MAXK); j++)
      if (j < int'(geom.rk) && pos >= IDXW'(j) * IDXW'(geom.ck)) kr = KW'(j);
    kc  = KW'(pos - IDXW'(kr) * IDXW'(geom.ck));
  end

  // Two-stage window selection: a row multiplexer per output row, then a
  // column multiplexer per output feature (RI:1 then CI:1 instead of a
  // single RI*CI:1 multiplexer per feature).
  logic signed [MW-1:0] rows [RO][CI];

  always_comb begin
    for (int r = 0; r < int'(RO); r++) begin
      automatic int rr = int'(kr) + r * int'(geom.stride);
      for (int c = 0; c < int'(CI); c++) rows[r][c] = '0;
      for (int j = 0; j < int'(RI); j++)
        if (rr == j)
          for (int c = 0; c < int'(CI); c++) rows[r][c] = acc[j*int'(CI) + c];
    end
  end

  always_comb begin
    for (int r = 0; r < int'(RO); r++) begin
      for (int c = 0; c < int'(CO); c++) begin
        automatic int cc = int'(kc) + c * int'(geom.stride);
        win[r*CO + c] = '0;
        for (int j = 0; j < int'(CI); j++)
          if (cc == j) win[r*CO + c] = rows[r][j];
      end
    end
  end
endmodule
