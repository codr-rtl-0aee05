// tb_codr_pu: one processing unit at its default size (4 MPEs, 4 APEs,
// 20 x 20 input tiles, 8 x 8 output tiles). Two cycles of an Iteration
// (8 input channels) accumulate into the APEs, preset with random biases.
// For each cycle the four MPEs are loaded one after another, as the
// controller does. Output rows are compared with a direct convolution,
// ReLU, optional 2x2 max pooling, shift and saturation computed here. The
// run counts cycles in which two MPEs competed for one APE.
module tb_codr_pu;
  import codr_pkg::*;
  import tb_codr_pkg::*;
  localparam int unsigned E = T_RI * T_CI;
  logic clk = 0, rst_n = 0, wl_push = 0, wl_ready, go = 0, ape_init = 0, idle;
  enc_cfg_t enc; geom_cfg_t geom; post_cfg_t post;
  logic [DW-1:0] in_tile [T_N][E];
  logic [1:0] wl_mpe = 0, go_mpe = 0, rd_ape = 0;
  stream_e wl_sel = STR_CNT;
  logic [WW-1:0] wl_data = 0;
  logic [15:0] entries = 0;
  logic signed [PW-1:0] bias [T_M];
  logic [2:0] rd_row = 0;
  logic [DW-1:0] rd_data [T_CO];
  longint model [T_M][T_RO*T_CO];
  int checks = 0, failures = 0, contention = 0;

  codr_pu dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    automatic int req [T_M] = '{default: 0};
    for (int i = 0; i < int'(T_N); i++) if (dut.m_valid[i]) req[dut.m_dst[i]]++;
    for (int j = 0; j < int'(T_M); j++) if (req[j] > 1) contention++;
  end

  task automatic push_words(input stream_e s, input int unsigned w[$]);
    foreach (w[i]) begin
      wl_push = 1; wl_sel = s; wl_data = w[i];
      @(posedge clk); while (!wl_ready) @(posedge clk);
      @(negedge clk);
    end
    wl_push = 0;
  endtask

  initial begin
    int w[];
    int unsigned cw[$], dw[$], iw[$];
    enc_stats_t st;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      automatic int k = 3, s = 1 + (t % 2);
      automatic bit pool = (t >= 2);
      automatic int sh = 6;
      geom = '{rk: KW'(k), ck: KW'(k), stride: 3'(s)};
      post = '{relu_en: 1'b1, pool_en: pool, shift: 5'(sh)};
      enc = '{cnt_bits: 4'd2, wlp_bits: 4'd2, ilp_bits: 4'd3, iabs_bits: 4'd6};
      foreach (bias[j]) bias[j] = PW'(int'($urandom % 512) - 256);
      @(negedge clk); ape_init = 1;
      @(negedge clk); ape_init = 0;
      foreach (model[j, e]) model[j][e] = longint'(bias[j]);
      for (int cyc = 0; cyc < 2; cyc++) begin
        foreach (in_tile[i, e]) in_tile[i][e] = 8'(int'($urandom % 64) - 16);
        for (int i = 0; i < int'(T_N); i++) begin
          w = new[T_M * k * k];
          foreach (w[x]) w[x] = rnd_weight(60, 3);
          st = encode(w, 2, 2, 3, 6, 1'b0, cw, dw, iw);
          for (int j = 0; j < int'(T_M); j++)
            for (int r = 0; r < int'(T_RO); r++)
              for (int c = 0; c < int'(T_CO); c++)
                for (int kr = 0; kr < k; kr++)
                  for (int kc = 0; kc < k; kc++)
                    model[j][r*T_CO + c] += longint'(w[j*k*k + kr*k + kc]) *
                        longint'($signed(in_tile[i][(kr + r*s)*T_CI + kc + c*s]));
          @(negedge clk); go = 1; go_mpe = 2'(i); entries = 16'(st.entries);
          @(negedge clk); go = 0;
          wl_mpe = 2'(i);
          push_words(STR_CNT, cw); push_words(STR_DLT, dw); push_words(STR_IDX, iw);
        end
        @(negedge clk);
        while (!idle) @(negedge clk);
        @(negedge clk);
      end
      for (int j = 0; j < int'(T_M); j++)
        for (int r = 0; r < int'(T_RO); r++) begin
          rd_ape = 2'(j); rd_row = 3'(r); #1;
          for (int c = 0; c < int'(T_CO); c++) begin
            automatic int exp;
            if (!pool) exp = requant(model[j][r*T_CO + c], sh, 1'b1);
            else if (r < 4 && c < 4) begin
              automatic longint v = model[j][2*r*T_CO + 2*c];
              for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++)
                if (model[j][(2*r+a)*T_CO + 2*c+b] > v) v = model[j][(2*r+a)*T_CO + 2*c+b];
              exp = requant(v, sh, 1'b1);
            end else exp = 0;
            checks++;
            if (rd_data[c] !== DW'(exp)) begin
              failures++;
              if (failures < 10) $display("FAIL t%0d ape%0d r%0d c%0d: %0d vs %0d", t, j, r, c, $signed(rd_data[c]), exp);
            end
          end
        end
    end
    checks++;
    if (contention == 0) begin failures++; $display("FAIL no APE contention seen"); end
    $display("APE contention cycles: %0d", contention);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
