// codr_input_rf: Input Register File shared by all processing units.
//
// Holds T_N layers of a T_RI x T_CI input-feature tile. The controller
// writes one feature per cycle (we, layer, row, col, wdata); every feature
// is visible on `tile` from the next cycle. Layer i of `tile` is wired to
// MPE i of every PU (broadcast), so all PUs work on the same input region.
// The paper fixes the sharing and the broadcast; the one-feature write port
// and the reset to zero are this design's choice.
module codr_input_rf
  import codr_pkg::*;
#(
  parameter int unsigned N_L = T_N,
  parameter int unsigned R   = T_RI,
  parameter int unsigned C   = T_CI
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   we,
  input  logic [$clog2(N_L)-1:0] layer,
  input  logic [$clog2(R)-1:0]   row,
  input  logic [$clog2(C)-1:0]   col,
  input  logic [DW-1:0]          wdata,
  output logic [DW-1:0]          tile [N_L][R*C]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < int'(N_L); l++)
        for (int e = 0; e < int'(R*C); e++) tile[l][e] <= '0;
    end else if (we && int'(row) < int'(R) && int'(col) < int'(C)) begin
      tile[layer][int'(row)*int'(C) + int'(col)] <= wdata;
    end
  end
endmodule
