// codr_interconnect: interconnection network (crossbar) of a PU.
//
// T_N MPEs each offer one partial-result window (in_valid, in_m, in_data);
// in_m names the destination APE. Every APE takes at most one window per
// cycle. When several MPEs target the same APE, a round-robin arbiter per
// APE picks one; the winner sees in_ready high in the same cycle
// (valid/ready handshake) and its window appears on that APE's
// out_valid/out_data in the same cycle (no register). The paper names the
// network and its end points; arbitration and handshake are this design's.
module codr_interconnect
  import codr_pkg::*;
#(
  parameter int unsigned NS = T_N,        // sources (MPEs)
  parameter int unsigned ND = T_M,        // destinations (APEs)
  parameter int unsigned NE = T_RO * T_CO // elements per window
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid [NS],
  input  logic [$clog2(ND)-1:0]      in_m     [NS],
  input  logic signed [MW-1:0]       in_data  [NS][NE],
  output logic                       in_ready [NS],
  output logic                       out_valid[ND],
  output logic signed [MW-1:0]       out_data [ND][NE]
);
  localparam int unsigned SW = (NS > 1) ? $clog2(NS) : 1;

  logic [SW-1:0] rr_ptr [ND];   // highest priority source per destination
  logic [SW-1:0] winner [ND];

  always_comb begin
    for (int s = 0; s < int'(NS); s++) in_ready[s] = 1'b0;
    for (int d = 0; d < int'(ND); d++) begin
      out_valid[d] = 1'b0;
      winner[d]    = '0;
      for (int k = int'(NS) - 1; k >= 0; k--) begin
        automatic int s = (int'(rr_ptr[d]) + k) % int'(NS);
        if (in_valid[s] && int'(in_m[s]) == d) begin
          out_valid[d] = 1'b1;
          winner[d]    = SW'(s);
        end
      end
      if (out_valid[d]) in_ready[winner[d]] = 1'b1;
      for (int e = 0; e < int'(NE); e++) out_data[d][e] = in_data[winner[d]][e];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < int'(ND); d++) rr_ptr[d] <= '0;
    end else begin
      for (int d = 0; d < int'(ND); d++)
        if (out_valid[d]) rr_ptr[d] <= SW'((int'(winner[d]) + 1) % int'(NS));
    end
  end

  // A source is granted by at most one destination (it names only one).
  for (genvar s = 0; s < NS; s++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) in_ready[s] |-> in_valid[s])
      else $error("codr_interconnect: grant without request");
  end
endmodule
