// tb_codr_ape: presets the Output RF with a random bias, adds random
// partial-result windows on random cycles, and reads all rows back
// (ReLU off, no pooling, shift 0 first; then pooling with ReLU and a
// shift), comparing with sums kept here.
module tb_codr_ape;
  import codr_pkg::*;
  import tb_codr_pkg::*;
  logic clk = 0, rst_n = 0, init = 0, acc_valid = 0;
  logic signed [PW-1:0] bias;
  logic signed [MW-1:0] acc_data [T_RO*T_CO];
  post_cfg_t post;
  logic [2:0] rd_row;
  logic [DW-1:0] rd_data [T_CO];
  longint model [T_RO*T_CO];
  int checks = 0, failures = 0;

  codr_ape dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      automatic int b = int'($urandom % 64) - 32;
      automatic bit pool = t[0];
      automatic int sh = pool ? 2 : 0;
      post = '{relu_en: pool, pool_en: pool, shift: 5'(sh)};
      @(negedge clk); init = 1; bias = PW'(b);
      @(negedge clk); init = 0;
      foreach (model[e]) model[e] = b;
      for (int k = 0; k < 12; k++) begin
        foreach (acc_data[e]) acc_data[e] = MW'(int'($urandom % 20) - 10);
        acc_valid = ($urandom % 3) != 0;
        if (acc_valid) foreach (model[e]) model[e] += longint'(acc_data[e]);
        @(negedge clk); acc_valid = 0;
      end
      for (int r = 0; r < int'(T_RO); r++) begin
        rd_row = 3'(r); #1;
        for (int c = 0; c < int'(T_CO); c++) begin
          automatic int exp;
          if (!pool) exp = requant(model[r*T_CO + c], sh, 1'b0);
          else if (r < 4 && c < 4) begin
            automatic longint v = model[2*r*T_CO + 2*c];
            for (int a = 0; a < 2; a++) for (int bb = 0; bb < 2; bb++)
              if (model[(2*r+a)*T_CO + 2*c+bb] > v) v = model[(2*r+a)*T_CO + 2*c+bb];
            exp = requant(v, sh, 1'b1);
          end else exp = 0;
          checks++;
          if (rd_data[c] !== DW'(exp)) begin failures++; $display("FAIL t%0d r%0d c%0d", t, r, c); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
