// tb_codr_ctrl: the layer controller at a small size (2 PUs of 2 MPEs and
// 2 APEs, 6 x 6 input tiles, 2 x 2 output tiles) against models of the
// SRAMs and of the processing units. The layer has 3 input channels (not a
// multiple of T_N), 6 output channels (second group half empty), a 5 x 6
// input map (so tile edges read zeros) and 2 x 2 output tiles.
// The expected event sequences are built here from the loop order
// (groups, tile rows, tile columns, input-channel tiles) and compared in
// order: every Input RF write, every MPE start with its entry count,
// every Weight RF word with its stream, the biases at each tile start and
// every Output SRAM write. The PU model stays busy for a random time after
// each start and refuses words at random.
module tb_codr_ctrl;
  import codr_pkg::*;
  localparam int unsigned NPU = 2, NN = 2, NM = 2, RI = 6, CI = 6, RO = 2, CO = 2;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  layer_cfg_t cfg;
  logic in_re, w_re, out_we;
  logic [AW-1:0] in_addr, w_addr, out_addr;
  logic [DW-1:0] in_rdata;
  logic [WW-1:0] w_rdata;
  logic [CO*DW-1:0] out_wdata;
  logic irf_we; logic [0:0] irf_layer; logic [2:0] irf_row, irf_col; logic [DW-1:0] irf_data;
  logic [0:0] wl_pu, wl_mpe, go_pu, go_mpe, rd_pu, rd_ape; logic [0:0] rd_row;
  logic wl_push, wl_ready = 1, go, ape_init;
  stream_e wl_sel; logic [WW-1:0] wl_data;
  logic [15:0] entries;
  logic signed [PW-1:0] bias [NPU][NM];
  logic pu_idle [NPU];
  logic [DW-1:0] rd_data [CO];

  codr_ctrl #(.NPU(NPU), .NN(NN), .NM(NM), .RI(RI), .CI(CI), .RO(RO), .CO(CO)) dut (.*);
  always #5 clk = ~clk;

  // memory models
  logic [DW-1:0] in_mem [4096];
  logic [WW-1:0] w_mem [4096];
  always @(posedge clk) begin
    if (in_re) in_rdata <= in_mem[in_addr];
    if (w_re)  w_rdata  <= w_mem[w_addr];
  end
  int tile_no = 0;
  always_comb for (int c = 0; c < int'(CO); c++)
    rd_data[c] = DW'(tile_no * 37 + int'(rd_pu) * 11 + int'(rd_ape) * 5 + int'(rd_row) * 3 + c);

  // expected event streams
  typedef struct { int kind; longint a; longint b; longint c; longint d; } ev_t;
  // kind 0: irf write (layer,row,col,data) 1: go (pu,mpe,entries) 2: word (pu,mpe,sel,data)
  //      3: tile start (bias check) 4: out write (addr,data)
  ev_t exp_q[$];
  int checks = 0, failures = 0, nev = 0;
  int bias_of [8][NPU*NM];

  function automatic void expect_ev(int k, longint a, longint b, longint c, longint d);
    ev_t e; e.kind = k; e.a = a; e.b = b; e.c = c; e.d = d; exp_q.push_back(e);
  endfunction

  task automatic got(int k, longint a, longint b, longint c, longint d);
    ev_t e;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected event %0d", k); return; end
    e = exp_q.pop_front(); nev++;
    if (e.kind != k || e.a != a || e.b != b || e.c != c || e.d != d) begin
      failures++;
      if (failures < 10) $display("FAIL event %0d: got %0d (%0d %0d %0d %0d) exp %0d (%0d %0d %0d %0d)",
                                  nev, k, a, b, c, d, e.kind, e.a, e.b, e.c, e.d);
    end
  endtask

  int cnt [NPU];
  initial begin
    int N = 3, M = 6, ri = 5, ci = 6, ntr = 2, ntc = 2, s = 1;
    int n_mg = (M + NPU*NM - 1) / (NPU*NM), n_nt = (N + NN - 1) / NN;
    int wp = 5, mg_base;
    int blk_base [8];
    foreach (in_mem[i]) in_mem[i] = DW'($urandom);
    foreach (w_mem[i]) w_mem[i] = $urandom;
    cfg = '0;
    cfg.n_ch = 16'(N); cfg.m_ch = 16'(M); cfg.ri = 16'(ri); cfg.ci = 16'(ci);
    cfg.n_tr = 8'(ntr); cfg.n_tc = 8'(ntc); cfg.geom = '{rk: 4'd3, ck: 4'd3, stride: 3'(s)};
    cfg.post = '{relu_en: 1'b0, pool_en: 1'b0, shift: 5'd0};
    cfg.in_base = 20'd10; cfg.w_base = 20'(wp); cfg.out_base = 20'd3;
    // Weight SRAM image and the per-group block list
    for (int mg = 0; mg < n_mg; mg++) begin
      for (int b = 0; b < int'(NPU*NM); b++) begin bias_of[mg][b] = int'($urandom % 1000) - 500; w_mem[wp++] = WW'(bias_of[mg][b]); end
      blk_base[mg] = wp;
      for (int nt = 0; nt < n_nt; nt++)
        for (int p = 0; p < int'(NPU); p++)
          for (int q = 0; q < int'(NN); q++) begin
            automatic int c0 = $urandom % 3, d0 = $urandom % 3, i0 = $urandom % 3, en = $urandom % 9;
            w_mem[wp++] = WW'((d0 << 16) | c0);
            w_mem[wp++] = WW'((en << 16) | i0);
            wp += c0 + d0 + i0;
          end
    end
    // expected events
    for (int mg = 0; mg < n_mg; mg++)
      for (int tr = 0; tr < ntr; tr++)
        for (int tc = 0; tc < ntc; tc++) begin
          expect_ev(3, mg, 0, 0, 0);
          wp = blk_base[mg];
          for (int nt = 0; nt < n_nt; nt++) begin
            for (int l = 0; l < int'(NN); l++)
              for (int r = 0; r < int'(RI); r++)
                for (int c = 0; c < int'(CI); c++) begin
                  automatic int ch = nt*NN + l, row = tr*RO*s + r, col = tc*CO*s + c;
                  automatic int d = (ch < N && row < ri && col < ci) ? int'(in_mem[10 + (ch*ri + row)*ci + col]) : 0;
                  expect_ev(0, l, r, c, d);
                end
            for (int p = 0; p < int'(NPU); p++)
              for (int q = 0; q < int'(NN); q++) begin
                automatic int c0 = w_mem[wp] & 16'hffff, d0 = w_mem[wp] >> 16;
                automatic int i0 = w_mem[wp+1] & 16'hffff, en = w_mem[wp+1] >> 16;
                wp += 2;
                expect_ev(1, p, q, en, 0);
                for (int k = 0; k < c0; k++) expect_ev(2, p, q, 0, w_mem[wp++]);
                for (int k = 0; k < d0; k++) expect_ev(2, p, q, 1, w_mem[wp++]);
                for (int k = 0; k < i0; k++) expect_ev(2, p, q, 2, w_mem[wp++]);
              end
          end
          for (int p = 0; p < int'(NPU); p++)
            for (int a = 0; a < int'(NM); a++)
              for (int r = 0; r < int'(RO); r++) begin
                automatic int m = (mg*NPU + p)*NM + a;
                automatic int tn = (mg*ntr + tr)*ntc + tc + 1;
                automatic longint data = 0;
                for (int c = 0; c < int'(CO); c++) data |= longint'((tn*37 + p*11 + a*5 + r*3 + c) & 255) << (8*c);
                if (m < M) expect_ev(4, 3 + ((m*ntr + tr)*ntc + tc)*RO + r, data, 0, 0);
              end
        end
    foreach (cnt[p]) begin cnt[p] = 0; pu_idle[p] = 1; end
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
  end

  // PU model and event sampling (inputs change at the falling edge; the
  // controller's outputs are sampled 1 time unit later, which is what the
  // next rising edge takes)
  bit go_seen = 0; int go_p = 0; int cur_mg = 0;
  initial begin
    int cycles = 0;
    @(posedge rst_n);
    forever begin
      @(negedge clk);
      cycles++;
      for (int p = 0; p < int'(NPU); p++) if (cnt[p] > 0) cnt[p]--;
      if (go_seen) cnt[go_p] = 1 + $urandom % 30;
      go_seen = 0;
      for (int p = 0; p < int'(NPU); p++) pu_idle[p] = (cnt[p] == 0);
      wl_ready = ($urandom % 4) != 0;
      #1;
      if (irf_we) got(0, irf_layer, irf_row, irf_col, irf_data);
      if (go) begin got(1, go_pu, go_mpe, entries, 0); go_seen = 1; go_p = go_pu; end
      if (wl_push && wl_ready) got(2, wl_pu, wl_mpe, wl_sel, wl_data);
      if (out_we) got(4, out_addr, out_wdata, 0, 0);
      if (ape_init) begin
        ev_t e;
        tile_no++;
        checks++;
        if (exp_q.size() == 0 || exp_q[0].kind != 3) begin failures++; $display("FAIL unexpected tile start"); end
        else begin
          e = exp_q.pop_front(); cur_mg = int'(e.a);
          for (int p = 0; p < int'(NPU); p++)
            for (int a = 0; a < int'(NM); a++) begin
              checks++;
              if (int'(bias[p][a]) != bias_of[cur_mg][p*NM + a]) begin failures++; $display("FAIL bias"); end
            end
        end
      end
      if (done) begin
        checks++;
        if (exp_q.size() != 0) begin failures++; $display("FAIL %0d events missing", exp_q.size()); end
        $display("events checked: %0d in %0d cycles", nev, cycles);
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
