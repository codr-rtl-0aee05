// tb_codr_mpe: one MPE at its default size (20 x 20 input tile, 16 lanes).
// For random weight vectors of T_M kernels (sizes 1..5, stride 1 or 2,
// varied density and number of unique values) the weights are encoded in
// software, loaded into the Weight RF after `go`, and the windows the MPE
// sends are summed per destination APE. The sums must equal the direct
// convolution of the input tile with each kernel. out_ready is withheld at
// random to exercise back-pressure. With out_ready always high the run time
// must be entries*(passes+3) + 3*nonzeros cycles after the last word.
module tb_codr_mpe;
  import codr_pkg::*;
  import tb_codr_pkg::*;
  localparam int unsigned E = T_RI * T_CI;
  localparam int unsigned PASSES = (E + 15) / 16;
  logic clk = 0, rst_n = 0, go = 0, wl_push = 0, wl_ready, out_valid, out_ready = 1, done;
  logic [15:0] entries = 0;
  enc_cfg_t enc; geom_cfg_t geom;
  logic [DW-1:0] in_tile [E];
  stream_e wl_sel = STR_CNT;
  logic [WW-1:0] wl_data = 0;
  logic [1:0] out_m;
  logic signed [MW-1:0] out_data [T_RO*T_CO];
  longint sum [T_M][T_RO*T_CO];
  int checks = 0, failures = 0, stalls = 0, windows = 0;
  bit random_ready = 0;

  codr_mpe dut (.*);
  always #5 clk = ~clk;

  always @(negedge clk) out_ready <= random_ready ? (($urandom % 3) != 0) : 1'b1;
  always @(posedge clk) if (out_valid) begin
    if (out_ready) begin
      windows++;
      for (int e = 0; e < int'(T_RO*T_CO); e++) sum[out_m][e] += longint'(out_data[e]);
    end else stalls++;
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
    for (int t = 0; t < 24; t++) begin
      automatic int s = 1 + (t % 2);
      automatic int k = 1 + $urandom % 5;
      automatic int cb = 1 + $urandom % 4, lb = 1 + $urandom % 4, ib = 1 + $urandom % 4;
      automatic int nz = 0, t0, cyc;
      random_ready = (t % 3 == 2);
      if (s == 2 && k > 6) k = 6;
      geom = '{rk: KW'(k), ck: KW'(k), stride: 3'(s)};
      w = new[T_M * k * k];
      foreach (w[i]) begin w[i] = rnd_weight(20 + $urandom % 80, $urandom % 6); if (w[i] != 0) nz++; end
      foreach (in_tile[e]) in_tile[e] = 8'($urandom);
      enc = '{cnt_bits: 4'(cb), wlp_bits: 4'(lb), ilp_bits: 4'(ib), iabs_bits: 4'd7};
      st = encode(w, cb, lb, ib, 7, 1'b0, cw, dw, iw);
      foreach (sum[m, e]) sum[m][e] = 0;
      @(negedge clk); go = 1; entries = 16'(st.entries);
      @(negedge clk); go = 0;
      push_words(STR_CNT, cw); push_words(STR_DLT, dw); push_words(STR_IDX, iw);
      t0 = $time; cyc = 0;
      while (!done) begin @(negedge clk); cyc++; end
      if (!random_ready) begin
        checks++;
        // decoding overlaps the load; the remaining time is bounded by the full cost
        if (cyc > st.entries * (int'(PASSES) + 3) + 3 * nz + 2) begin
          failures++; $display("FAIL t%0d: %0d cycles for %0d entries, %0d nonzeros", t, cyc, st.entries, nz);
        end
      end
      for (int m = 0; m < int'(T_M); m++)
        for (int r = 0; r < int'(T_RO); r++)
          for (int c = 0; c < int'(T_CO); c++) begin
            automatic longint exp = 0;
            for (int kr = 0; kr < k; kr++)
              for (int kc = 0; kc < k; kc++)
                exp += longint'(w[m*k*k + kr*k + kc]) * longint'($signed(in_tile[(kr + r*s)*T_CI + kc + c*s]));
            checks++;
            if (sum[m][r*T_CO + c] != exp) begin
              failures++;
              if (failures < 10) $display("FAIL t%0d m%0d r%0d c%0d: %0d vs %0d", t, m, r, c, sum[m][r*T_CO+c], exp);
            end
          end
    end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL back-pressure never exercised"); end
    $display("windows %0d, stalled cycles %0d", windows, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
