// tb_codr_interconnect: 4 sources each hold a window for a random APE until
// granted. Checks: each granted window arrives unchanged at its APE, at most
// one window per APE per cycle, a request is granted whenever its APE is
// free of others, and no source waits more than 3 grants of its APE
// (round-robin). Counts contended cycles.
module tb_codr_interconnect;
  import codr_pkg::*;
  localparam int unsigned NS = 4, ND = 4, NE = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid [NS]; logic [1:0] in_m [NS];
  logic signed [MW-1:0] in_data [NS][NE];
  logic in_ready [NS], out_valid [ND];
  logic signed [MW-1:0] out_data [ND][NE];
  int checks = 0, failures = 0, contended = 0;
  int wait_n [NS];
  bit granted [NS];

  codr_interconnect #(.NS(NS), .ND(ND), .NE(NE)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    foreach (in_valid[s]) begin in_valid[s] = 0; in_m[s] = 0; wait_n[s] = 0; end
    foreach (in_data[s, e]) in_data[s][e] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      for (int s = 0; s < int'(NS); s++)
        if (!in_valid[s] && ($urandom % 2)) begin
          in_valid[s] = 1; in_m[s] = 2'($urandom % 2);  // two hot APEs to force contention
          if ($urandom % 4 == 0) in_m[s] = 2'(2 + $urandom % 2);
          for (int e = 0; e < int'(NE); e++) in_data[s][e] = MW'($urandom);
          wait_n[s] = 0;
        end
      #1;
      for (int s = 0; s < int'(NS); s++) granted[s] = in_valid[s] && in_ready[s];
      if (k < 40) $display("k%0d v%0d%0d%0d%0d m%0d%0d%0d%0d r%0d%0d%0d%0d p%0d%0d", k, in_valid[0],in_valid[1],in_valid[2],in_valid[3], in_m[0],in_m[1],in_m[2],in_m[3], in_ready[0],in_ready[1],in_ready[2],in_ready[3], dut.rr_ptr[0], dut.rr_ptr[1]);
      for (int d = 0; d < int'(ND); d++) begin
        automatic int nreq = 0, ngr = 0, g = -1;
        for (int s = 0; s < int'(NS); s++) begin
          if (in_valid[s] && int'(in_m[s]) == d) nreq++;
          if (in_ready[s] && int'(in_m[s]) == d) begin ngr++; g = s; end
        end
        if (nreq > 1) contended++;
        checks++;
        if (ngr != (nreq > 0 ? 1 : 0) || out_valid[d] != (nreq > 0)) begin failures++; $display("FAIL grant d%0d", d); end
        if (g >= 0) for (int e = 0; e < int'(NE); e++) begin
          checks++;
          if (out_data[d][e] !== in_data[g][e]) begin failures++; $display("FAIL data"); end
        end
      end
      @(posedge clk); #1;
      for (int s = 0; s < int'(NS); s++) begin
        if (granted[s]) in_valid[s] = 0;
        else if (in_valid[s]) begin
          wait_n[s]++;
          checks++;
          if (wait_n[s] > int'(NS) - 1) begin failures++; $display("FAIL starvation s%0d", s); end
        end
      end
    end
    checks++;
    if (contended == 0) begin failures++; $display("FAIL no contention exercised"); end
    $display("contended cycles: %0d", contended);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
