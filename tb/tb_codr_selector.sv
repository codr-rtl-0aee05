// tb_codr_selector: random indexes, kernel sizes (1..6) and strides (1, 2)
// on a random 20 x 20 result matrix; the window and destination are
// recomputed here from the index formula idx = m*RK*CK + kr*CK + kc + 1.
module tb_codr_selector;
  import codr_pkg::*;
  logic [IDXW-1:0] idx;
  geom_cfg_t geom;
  logic signed [MW-1:0] acc [T_RI*T_CI];
  logic [1:0] m;
  logic signed [MW-1:0] win [T_RO*T_CO];
  int checks = 0, failures = 0;

  codr_selector dut (.*);

  initial begin
    foreach (acc[e]) acc[e] = MW'($urandom);
    for (int t = 0; t < 2000; t++) begin
      automatic int s = 1 + $urandom % 2;
      automatic int rk = 1 + $urandom % (s == 1 ? 6 : 5), ck = 1 + $urandom % (s == 1 ? 6 : 5);
      automatic int em = $urandom % T_M, kr = $urandom % rk, kc = $urandom % ck;
      if ((T_RO - 1) * s + rk > T_RI) rk = T_RI - (T_RO - 1) * s;
      if (kr >= rk) kr = rk - 1;
      geom = '{rk: KW'(rk), ck: KW'(ck), stride: 3'(s)};
      idx = IDXW'(em * rk * ck + kr * ck + kc + 1);
      #1;
      checks++;
      if (int'(m) != em) begin failures++; $display("FAIL m %0d vs %0d (idx %0d)", m, em, idx); end
      for (int r = 0; r < int'(T_RO); r++)
        for (int c = 0; c < int'(T_CO); c++) begin
          checks++;
          if (win[r*T_CO + c] !== acc[(kr + r*s)*T_CI + kc + c*s]) begin
            failures++;
            if (failures < 10) $display("FAIL win r%0d c%0d kr%0d kc%0d s%0d", r, c, kr, kc, s);
          end
        end
      if (t % 100 == 0) foreach (acc[e]) acc[e] = MW'($urandom);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
