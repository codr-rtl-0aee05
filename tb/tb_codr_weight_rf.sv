// tb_codr_weight_rf: pushes random words into the three streams of a
// 256-bit-per-stream Weight RF while popping random numbers of bits, and
// compares peek/avail/ready with a bit-queue model per stream. Also checks
// that clr empties the streams.
module tb_codr_weight_rf;
  import codr_pkg::*;
  localparam int unsigned DEPTH = 256;
  logic clk = 0, rst_n = 0, clr = 0, push = 0, ready;
  stream_e sel;
  logic [31:0] wdata;
  logic [15:0] peek_cnt, peek_dlt, peek_idx;
  logic [8:0] avail_cnt, avail_dlt, avail_idx;
  logic pop_cnt = 0, pop_dlt = 0, pop_idx = 0;
  logic [4:0] pop_n_cnt = 0, pop_n_dlt = 0, pop_n_idx = 0;
  bit q [3][$];
  int checks = 0, failures = 0;

  codr_weight_rf #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [15:0] mpeek(int s);
    logic [15:0] v = '0;
    for (int i = 0; i < 16 && i < q[s].size(); i++) v[i] = q[s][i];
    return v;
  endfunction

  task automatic compare();
    logic [15:0] pk [3];
    int av [3];
    pk[0] = peek_cnt; pk[1] = peek_dlt; pk[2] = peek_idx;
    av[0] = avail_cnt; av[1] = avail_dlt; av[2] = avail_idx;
    for (int s = 0; s < 3; s++) begin
      automatic int n = (q[s].size() < 16) ? q[s].size() : 16;
      automatic logic [15:0] mask = 16'((32'd1 << n) - 1);
      checks += 2;
      if (av[s] != q[s].size()) begin failures++; $display("FAIL avail s%0d %0d vs %0d", s, av[s], q[s].size()); end
      if ((pk[s] & mask) !== (mpeek(s) & mask)) begin failures++; $display("FAIL peek s%0d", s); end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      automatic int s = $urandom % 3;
      automatic bit do_push = ($urandom % 2) == 1;
      automatic int pn [3];
      automatic bit pp [3];
      @(negedge clk);
      compare();
      sel = stream_e'(s); wdata = $urandom;
      #1;
      checks++;
      if (ready !== ((q[s].size() + 32) <= DEPTH)) begin failures++; $display("FAIL ready"); end
      push = do_push;
      for (int t = 0; t < 3; t++) begin
        pn[t] = $urandom % 17;
        if (pn[t] > q[t].size()) pn[t] = q[t].size();
        pp[t] = ($urandom % 3) != 0 && pn[t] > 0;
      end
      pop_cnt = pp[0]; pop_dlt = pp[1]; pop_idx = pp[2];
      pop_n_cnt = 5'(pn[0]); pop_n_dlt = 5'(pn[1]); pop_n_idx = 5'(pn[2]);
      @(posedge clk);
      if (do_push && (q[s].size() + 32) <= DEPTH)
        for (int b = 0; b < 32; b++) q[s].push_back(wdata[b]);
      for (int t = 0; t < 3; t++) if (pp[t]) repeat (pn[t]) void'(q[t].pop_front());
      if (k == 1500) begin
        @(negedge clk); push = 0; pop_cnt = 0; pop_dlt = 0; pop_idx = 0; clr = 1;
        @(negedge clk); clr = 0;
        for (int t = 0; t < 3; t++) q[t].delete();
      end
    end
    @(negedge clk); push = 0; pop_cnt = 0; pop_dlt = 0; pop_idx = 0;
    @(negedge clk); compare();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
