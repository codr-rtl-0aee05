// tb_codr_top: end-to-end test of the accelerator with 2 PUs (other sizes default).
//
// Runs whole convolutional layers through codr_top: the input map, the
// compressed weights (encoded here in software, per output-channel group,
// input-channel tile, PU and MPE) and the biases are written through the
// host ports, the layer is started, and every output word is read back and
// compared with a direct convolution followed by bias, ReLU, optional 2x2
// max pooling, shift and saturation.
// Three layers exercise every mechanism; each is counted and must occur.
module tb_codr_top;
  import codr_pkg::*;
  import tb_codr_pkg::*;
  localparam int unsigned NPU = 2;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  layer_cfg_t cfg;
  logic host_in_we = 0, host_w_we = 0, host_out_re = 0;
  logic [AW-1:0] host_in_addr = 0, host_w_addr = 0, host_out_addr = 0;
  logic [DW-1:0] host_in_wdata = 0;
  logic [WW-1:0] host_w_wdata = 0;
  logic [T_CO*DW-1:0] host_out_rdata;
  int checks = 0, failures = 0;

  codr_top #(.NPU(NPU)) dut (.*);
  always #5 clk = ~clk;

  // mechanism counters
  int ev_hp = 0, ev_lp = 0, ev_abs = 0, ev_rel = 0, ev_ovf = 0, ev_gap = 0, ev_rep = 0, ev_zero = 0;
  int ev_contend = 0, ev_bp = 0, ev_pool = 0, ev_relu = 0, ev_stride2 = 0, ev_pad = 0;
  int ev_multi_nt = 0, ev_multi_mg = 0, ev_multi_tile = 0;
  always @(posedge clk) begin
    automatic int req [T_M] = '{default: 0};
    for (int i = 0; i < int'(T_N); i++)
      if (dut.g_pu[0].u_pu.m_valid[i]) begin
        req[dut.g_pu[0].u_pu.m_dst[i]]++;
        if (!dut.g_pu[0].u_pu.m_ready[i]) ev_bp++;
      end
    for (int j = 0; j < int'(T_M); j++) if (req[j] > 1) ev_contend++;
  end

  int inmap [];     // [n][ri][ci]
  int wts [];       // [m][n][k][k]
  int bias [];

  function automatic int IN(int n, int r, int c, int ri, int ci);
    if (r < 0 || c < 0 || r >= ri || c >= ci) return 0;
    return inmap[(n*ri + r)*ci + c];
  endfunction

  task automatic host_w(int a, int unsigned d);
    @(negedge clk); host_w_we = 1; host_w_addr = AW'(a); host_w_wdata = d;
    @(negedge clk); host_w_we = 0;
  endtask

  task automatic run_layer(input int N, input int M, input int ri, input int ci, input int k, input int s,
                           input int ntr, input int ntc, input bit relu, input bit pool, input int sh,
                           input int dens, input int ushift, input int cb, input int lb, input int ib, input int ab,
                           input bit extremes);
    int wp, n_mg, n_nt, rows, cyc;
    int unsigned cw[$], dw[$], iw[$];
    enc_stats_t st;
    int wv[];
    n_mg = (M + NPU*T_M - 1) / (NPU*T_M);
    n_nt = (N + T_N - 1) / T_N;
    rows = pool ? T_RO/2 : T_RO;
    if (n_nt > 1) ev_multi_nt++;
    if (n_mg > 1) ev_multi_mg++;
    if (ntr * ntc > 1) ev_multi_tile++;
    if (pool) ev_pool++;
    if (relu) ev_relu++;
    if (s == 2) ev_stride2++;
    if ((ntr*T_RO - 1)*s + k > ri || N % T_N != 0) ev_pad++;
    inmap = new[N*ri*ci];
    foreach (inmap[i]) inmap[i] = int'($urandom % 80) - 20;
    wts = new[M*N*k*k];
    foreach (wts[i]) begin wts[i] = rnd_weight(dens, ushift); if (wts[i] == 0) ev_zero++; end
    if (extremes) begin wts[0] = -128; wts[1] = 127; wts[2] = 127; end
    bias = new[n_mg*NPU*T_M];
    foreach (bias[i]) bias[i] = int'($urandom % 2000) - 1000;
    // input SRAM
    for (int i = 0; i < N*ri*ci; i++) begin
      @(negedge clk); host_in_we = 1; host_in_addr = AW'(i); host_in_wdata = DW'(inmap[i]);
    end
    @(negedge clk); host_in_we = 0;
    // weight SRAM
    wp = 0;
    for (int mg = 0; mg < n_mg; mg++) begin
      for (int b = 0; b < int'(NPU*T_M); b++) host_w(wp++, bias[mg*NPU*T_M + b]);
      for (int nt = 0; nt < n_nt; nt++)
        for (int p = 0; p < int'(NPU); p++)
          for (int q = 0; q < int'(T_N); q++) begin
            automatic int n = nt*T_N + q;
            wv = new[T_M*k*k];
            for (int j = 0; j < int'(T_M); j++) begin
              automatic int m = (mg*NPU + p)*T_M + j;
              for (int x = 0; x < k*k; x++)
                wv[j*k*k + x] = (m < M && n < N) ? wts[(m*N + n)*k*k + x] : 0;
            end
            st = encode(wv, cb, lb, ib, ab, 1'b0, cw, dw, iw);
            ev_hp += st.n_hp; ev_lp += st.n_lp; ev_abs += st.n_abs; ev_rel += st.n_rel;
            ev_ovf += st.n_dummy_ovf; ev_gap += st.n_dummy_gap;
            ev_rep += (st.n_abs + st.n_rel) - (st.entries - st.n_dummy_gap);
            host_w(wp++, (dw.size() << 16) | cw.size());
            host_w(wp++, (st.entries << 16) | iw.size());
            foreach (cw[i]) host_w(wp++, cw[i]);
            foreach (dw[i]) host_w(wp++, dw[i]);
            foreach (iw[i]) host_w(wp++, iw[i]);
          end
    end
    cfg = '0;
    cfg.n_ch = 16'(N); cfg.m_ch = 16'(M); cfg.ri = 16'(ri); cfg.ci = 16'(ci);
    cfg.n_tr = 8'(ntr); cfg.n_tc = 8'(ntc);
    cfg.geom = '{rk: KW'(k), ck: KW'(k), stride: 3'(s)};
    cfg.enc = '{cnt_bits: 4'(cb), wlp_bits: 4'(lb), ilp_bits: 4'(ib), iabs_bits: 4'(ab)};
    cfg.post = '{relu_en: relu, pool_en: pool, shift: 5'(sh)};
    cfg.in_base = '0; cfg.w_base = '0; cfg.out_base = '0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    $display("layer N=%0d M=%0d K=%0d s=%0d tiles=%0dx%0d: %0d cycles, %0d weight words",
             N, M, k, s, ntr, ntc, cyc, wp);
    // read back and compare
    for (int m = 0; m < M; m++)
      for (int tr = 0; tr < ntr; tr++)
        for (int tc = 0; tc < ntc; tc++)
          for (int r = 0; r < rows; r++) begin
            @(negedge clk); host_out_re = 1; host_out_addr = AW'(((m*ntr + tr)*ntc + tc)*rows + r);
            @(negedge clk); host_out_re = 0;
            for (int c = 0; c < (pool ? T_CO/2 : T_CO); c++) begin
              automatic longint best = 0;
              automatic int exp;
              for (int pr = 0; pr < (pool ? 2 : 1); pr++)
                for (int pc = 0; pc < (pool ? 2 : 1); pc++) begin
                  automatic int orow = tr*T_RO + (pool ? 2*r + pr : r);
                  automatic int ocol = tc*T_CO + (pool ? 2*c + pc : c);
                  automatic longint acc = longint'(bias[m]);
                  for (int n = 0; n < N; n++)
                    for (int kr = 0; kr < k; kr++)
                      for (int kc = 0; kc < k; kc++)
                        acc += longint'(wts[(m*N + n)*k*k + kr*k + kc]) * IN(n, orow*s + kr, ocol*s + kc, ri, ci);
                  if ((pr == 0 && pc == 0) || acc > best) best = acc;
                end
              exp = requant(best, sh, relu);
              checks++;
              if (host_out_rdata[c*DW +: DW] !== DW'(exp)) begin
                failures++;
                if (failures < 10) $display("FAIL m%0d tile %0d,%0d r%0d c%0d: %0d vs %0d", m, tr, tc, r, c,
                                            $signed(host_out_rdata[c*DW +: DW]), exp);
              end
            end
          end
  endtask

  task automatic need(input int v, input string what);
    checks++;
    $display("  %-34s %0d", what, v);
    if (v == 0) begin failures++; $display("FAIL mechanism never exercised: %s", what); end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    // N, M, ri, ci, k, s, ntr, ntc, relu, pool, sh, density%, unique-shift, cnt, wlp, ilp, iabs, extremes
    run_layer(5, 12, 18, 18, 3, 1, 2, 2, 1'b1, 1'b0, 6, 70, 4, 2, 2, 3, 6, 1'b0);
    run_layer(4,  8, 19, 19, 5, 2, 1, 1, 1'b1, 1'b1, 7, 50, 0, 3, 3, 3, 7, 1'b1);
    run_layer(3,  6, 10, 12, 1, 1, 2, 2, 1'b0, 1'b0, 4, 90, 2, 4, 1, 1, 3, 1'b0);
    $display("mechanisms:");
    need(ev_zero, "zero weights skipped (sparsity)");
    need(ev_rep, "repeated weights reusing a product");
    need(ev_lp, "low-precision weight deltas");
    need(ev_hp, "high-precision weight deltas");
    need(ev_rel, "delta-coded indexes");
    need(ev_abs, "absolute indexes");
    need(ev_ovf, "repetition-count overflow dummies");
    need(ev_gap, "split deltas (count-0 entries)");
    need(ev_contend, "two MPEs contending for one APE");
    need(ev_bp, "MPE stalled by the network");
    need(ev_relu, "ReLU layers");
    need(ev_pool, "2x2 max pooling layers");
    need(ev_stride2, "stride-2 layers");
    need(ev_pad, "zero padding at map or channel edges");
    need(ev_multi_nt, "several input-channel tiles (output stationary)");
    need(ev_multi_mg, "several output-channel groups (input refetch)");
    need(ev_multi_tile, "several spatial tiles (weight refetch)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
