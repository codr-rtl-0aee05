// tb_codr_mlp_array: sends sequences of random deltas to the MLP Array
// (default 400 features, 16 lanes) and checks after each that every entry
// equals (sum of deltas) x feature, that done comes 25 passes after start,
// and that clr zeroes the matrix.
module tb_codr_mlp_array;
  import codr_pkg::*;
  localparam int unsigned E = T_RI * T_CI, LANES = 16;
  localparam int unsigned PASSES = (E + LANES - 1) / LANES;
  logic clk = 0, rst_n = 0, clr = 0, start = 0, busy, done;
  logic signed [DLW-1:0] delta = 0;
  logic [DW-1:0] in_tile [E];
  logic signed [MW-1:0] acc [E];
  int checks = 0, failures = 0;

  codr_mlp_array #(.E(E), .LANES(LANES)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    int wsum, cyc;
    foreach (in_tile[e]) in_tile[e] = 8'($urandom);
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      checks++; if (acc[$urandom % E] != 0) begin failures++; $display("FAIL clr"); end
      wsum = 0;
      for (int k = 0; k < 6; k++) begin
        automatic int d = (k == 0) ? int'($urandom % 256) - 128 : int'($urandom % 8);
        if (wsum + d > 127 || wsum + d < -128) d = 0;
        wsum += d;
        delta = DLW'(d); start = 1; @(negedge clk); start = 0; delta = 0;
        cyc = 1;
        while (!done) begin @(negedge clk); cyc++; end
        checks++;
        if (cyc != int'(PASSES) + 1) begin failures++; $display("FAIL latency %0d", cyc); end
        for (int e = 0; e < int'(E); e++) begin
          automatic int exp = wsum * int'($signed(in_tile[e]));
          checks++;
          if (int'(acc[e]) != exp) begin failures++; if (failures < 10) $display("FAIL e%0d %0d vs %0d", e, acc[e], exp); end
        end
      end
      foreach (in_tile[e]) in_tile[e] = 8'($urandom);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
