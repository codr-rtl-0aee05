// tb_codr_pool_af: random 8 x 8 tiles of partial sums under all four
// combinations of ReLU and 2x2 max pooling and random shifts; the expected
// features are computed here (ReLU, max of four, shift, saturate).
module tb_codr_pool_af;
  import codr_pkg::*;
  import tb_codr_pkg::*;
  logic signed [PW-1:0] tile [T_RO*T_CO];
  post_cfg_t cfg;
  logic [DW-1:0] feat [T_RO*T_CO];
  int checks = 0, failures = 0;

  codr_pool_af dut (.*);

  initial begin
    for (int t = 0; t < 400; t++) begin
      automatic bit relu = t[0], pool = t[1];
      automatic int sh = $urandom % 12;
      foreach (tile[e]) tile[e] = PW'(int'($urandom % 200000) - 100000);
      cfg = '{relu_en: relu, pool_en: pool, shift: 5'(sh)};
      #1;
      for (int r = 0; r < int'(T_RO); r++)
        for (int c = 0; c < int'(T_CO); c++) begin
          automatic longint v;
          automatic int exp;
          if (!pool) exp = requant(longint'(tile[r*T_CO + c]), sh, relu);
          else if (r < int'(T_RO/2) && c < int'(T_CO/2)) begin
            v = longint'(tile[2*r*T_CO + 2*c]);
            for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++)
              if (longint'(tile[(2*r+a)*T_CO + 2*c+b]) > v) v = longint'(tile[(2*r+a)*T_CO + 2*c+b]);
            exp = requant(v, sh, relu);
          end else exp = 0;
          checks++;
          if (feat[r*T_CO + c] !== DW'(exp)) begin
            failures++;
            if (failures < 10) $display("FAIL t%0d r%0d c%0d: %0d vs %0d", t, r, c, $signed(feat[r*T_CO+c]), exp);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
