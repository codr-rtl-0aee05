// codr_mlp_array: differential scalar-matrix multiplier with its
// matrix-matrix accumulator (the MPE's "MLP Array").
//
// The accumulator holds one value per input feature of the tile. For each
// unique weight the MPE sends the weight's difference to the previous
// unique weight (start, delta); the array multiplies delta by every input
// feature and adds the product to the stored value, so the stored matrix
// becomes w_m x I (w_m = sum of the deltas so far). `clr` zeroes it at the
// start of a cycle of the Iteration (the "0" the first delta is added to).
// LANES multipliers work in parallel: the E features are processed in
// ceil(E/LANES) passes, one pass per clock; `done` pulses in the cycle after
// the last pass and `busy` is high from start until then. The differential
// scheme is the paper's; LANES = 16 is the paper's 64 multipliers per PU
// shared by its 4 MPEs, the pass-by-pass schedule is this design's choice.
module codr_mlp_array
  import codr_pkg::*;
#(
  parameter int unsigned E     = T_RI * T_CI,
  parameter int unsigned LANES = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr,
  input  logic                  start,
  input  logic signed [DLW-1:0] delta,
  input  logic [DW-1:0]         in_tile [E],
  output logic signed [MW-1:0]  acc [E],
  output logic                  busy,
  output logic                  done
);
  localparam int unsigned PASSES = (E + LANES - 1) / LANES;
  localparam int unsigned PCW    = (PASSES > 1) ? $clog2(PASSES) : 1;

  logic signed [DLW-1:0] d_q;
  logic [PCW-1:0]        pass;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      pass <= '0;
      d_q  <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        pass <= '0;
        d_q  <= delta;
      end else if (busy) begin
        if (int'(pass) == int'(PASSES) - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        pass <= pass + 1'b1;
      end
    end
  end

  // LANES multipliers, each adding delta x feature into one entry per pass.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < int'(E); e++) acc[e] <= '0;
    end else if (clr) begin
      for (int e = 0; e < int'(E); e++) acc[e] <= '0;
    end else if (busy) begin
      for (int l = 0; l < int'(LANES); l++) begin
        automatic int e = int'(pass) * int'(LANES) + l;
        if (e < int'(E))
          acc[e] <= acc[e] + MW'(d_q * $signed(in_tile[e]));
      end
    end
  end
endmodule
