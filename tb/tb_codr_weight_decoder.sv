// tb_codr_weight_decoder: checks the RLE decoder.
//
// 1. The worked example of the encoding (weights 1,1,1,2,4,4,9 at indexes
//    1,4,10,8,5,7,9, all bit-lengths 2, absolute index 4 bits): the streams
//    are given bit for bit; expected deltas 1,1,2,5, counts 3,1,2,1, indexes
//    1,4,10,8,5,7,9. The software encoder must produce the same bits.
// 2. Random weight vectors, encoded in software with random bit-lengths:
//    decoding must rebuild every weight at its index.
// The Weight RF is modelled here by bit queues.
module tb_codr_weight_decoder;
  import codr_pkg::*;
  import tb_codr_pkg::*;

  logic clk = 0, rst_n = 0, clr = 0;
  enc_cfg_t enc;
  logic [15:0] peek_cnt, peek_dlt, peek_idx;
  logic [11:0] avail_cnt, avail_dlt, avail_idx;
  logic pop_cnt, pop_dlt, pop_idx;
  logic [4:0] pop_n_cnt, pop_n_dlt, pop_n_idx;
  logic take_entry = 0, take_idx = 0, entry_ok, idx_ok, rep_zero;
  logic signed [DLW-1:0] delta;
  logic [IDXW-1:0] idx;

  int checks = 0, failures = 0;
  bit qc[$], qd[$], qi[$];
  int dl[$], cn[$], ix[$], wrec[];
  int wlen;

  codr_weight_decoder dut (.*);

  always #5 clk = ~clk;

  always_comb begin
    peek_cnt = '0; peek_dlt = '0; peek_idx = '0;
    for (int i = 0; i < 16; i++) begin
      if (i < qc.size()) peek_cnt[i] = qc[i];
      if (i < qd.size()) peek_dlt[i] = qd[i];
      if (i < qi.size()) peek_idx[i] = qi[i];
    end
    avail_cnt = 12'(qc.size()); avail_dlt = 12'(qd.size()); avail_idx = 12'(qi.size());
  end

  always @(posedge clk) begin
    if (pop_cnt) repeat (pop_n_cnt) void'(qc.pop_front());
    if (pop_dlt) repeat (pop_n_dlt) void'(qd.pop_front());
    if (pop_idx) repeat (pop_n_idx) void'(qi.pop_front());
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic load(input int unsigned w[$], ref bit q[$], input int nbits);
    q.delete();
    for (int i = 0; i < nbits; i++) q.push_back(bit'((w[i/32] >> (i%32)) & 1));
  endtask

  // Decode `entries` entries; return rebuilt weights and the sequences.
  task automatic run(input int entries);
    int wsum = 0;
    int ii;
    dl.delete(); cn.delete(); ix.delete();
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    for (int e = 0; e < entries; e++) begin
      int c = 0;
      while (!entry_ok) @(negedge clk);
      dl.push_back(int'(delta)); wsum += int'(delta);
      take_entry = 1; @(negedge clk); take_entry = 0;
      while (!rep_zero) begin
        while (!idx_ok) @(negedge clk);
        take_idx = 1; @(negedge clk); take_idx = 0;
        ii = idx;
        ix.push_back(ii); c++;
        if (ii >= 1 && ii <= wlen) wrec[ii-1] = wsum;
      end
      cn.push_back(c);
    end
  endtask

  initial begin
    int w[];
    int unsigned cw[$], dw[$], iw[$];
    int unsigned fc[$], fd[$], fi[$];
    enc_stats_t st;
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;

    // ---- 1. worked example ----
    enc = '{cnt_bits: 4'd2, wlp_bits: 4'd2, ilp_bits: 4'd2, iabs_bits: 4'd4};
    // counts 11 01 10 01; deltas 01|1 01|1 10|1 00000101|0;
    // indexes 01|1 11|1 1010|0 1000|0 0101|0 10|1 10|1 (value|flag, LSB first)
    fc = '{0}; fd = '{0};
    fc[0] = 3 | (1 << 2) | (2 << 4) | (1 << 6);
    fd[0] = 3 | (3 << 3) | (5 << 6) | (10 << 9);
    fi = '{0, 0};
    begin
      longint v = 0; int p = 0;
      int codes[7] = '{3, 7, 20, 16, 10, 5, 5};
      int lens[7]  = '{3, 3, 5, 5, 5, 3, 3};
      for (int k = 0; k < 7; k++) begin v |= longint'(codes[k]) << p; p += lens[k]; end
      fi[0] = int'(v[31:0]); fi[1] = int'(v[63:32]);
    end
    load(fc, qc, 8); load(fd, qd, 18); load(fi, qi, 27);
    wrec = new[10];
    wlen = 10; run(4);
    check(dl.size() == 4 && dl[0] == 1 && dl[1] == 1 && dl[2] == 2 && dl[3] == 5, "example deltas");
    check(cn.size() == 4 && cn[0] == 3 && cn[1] == 1 && cn[2] == 2 && cn[3] == 1, "example counts");
    check(ix.size() == 7 && ix[0] == 1 && ix[1] == 4 && ix[2] == 10 && ix[3] == 8 &&
          ix[4] == 5 && ix[5] == 7 && ix[6] == 9, "example indexes");
    check(qc.size() == 0 && qd.size() == 0 && qi.size() == 0, "example streams fully consumed");
    // the software encoder must give the same bits
    w = new[10]; w = '{1, 0, 0, 1, 4, 0, 4, 2, 9, 1};
    st = encode(w, 2, 2, 2, 4, 1'b0, cw, dw, iw);
    check(st.entries == 4 && cw[0] == fc[0] && dw[0] == fd[0] && iw[0] == fi[0], "encoder matches example");

    // ---- 2. random vectors ----
    for (int t = 0; t < 60; t++) begin
      int L = 4 * 9;
      int cb = 1 + $urandom % 5, lb = 1 + $urandom % 4, ib = 1 + $urandom % 4;
      w = new[L];
      for (int k = 0; k < L; k++) w[k] = rnd_weight(30 + $urandom % 70, $urandom % 5);
      if (t % 7 == 0) begin w[0] = -128; w[1] = 127; end   // forces a gap split
      enc = '{cnt_bits: 4'(cb), wlp_bits: 4'(lb), ilp_bits: 4'(ib), iabs_bits: 4'd6};
      st = encode(w, cb, lb, ib, 6, 1'b0, cw, dw, iw);
      load(cw, qc, cw.size() * 32); load(dw, qd, dw.size() * 32); load(iw, qi, iw.size() * 32);
      wrec = new[L];
      foreach (wrec[k]) wrec[k] = 0;
      wlen = L; run(st.entries);
      for (int k = 0; k < L; k++) check(wrec[k] == w[k], $sformatf("t%0d weight %0d: %0d vs %0d", t, k, wrec[k], w[k]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
