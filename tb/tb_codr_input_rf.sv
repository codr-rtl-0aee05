// tb_codr_input_rf: fills every feature of a 4 x 20 x 20 Input RF with
// random values in random order and checks the broadcast tile output,
// including that a write changes only its own entry.
module tb_codr_input_rf;
  import codr_pkg::*;
  logic clk = 0, rst_n = 0, we = 0;
  logic [1:0] layer; logic [4:0] row, col; logic [7:0] wdata;
  logic [7:0] tile [T_N][T_RI*T_CI];
  logic [7:0] model [T_N][T_RI*T_CI];
  int checks = 0, failures = 0;

  codr_input_rf dut (.*);
  always #5 clk = ~clk;

  initial begin
    @(negedge clk); rst_n = 1;
    foreach (model[l, e]) model[l][e] = 0;
    for (int k = 0; k < 3000; k++) begin
      automatic int l = $urandom % T_N, r = $urandom % T_RI, c = $urandom % T_CI;
      @(negedge clk); we = 1; layer = 2'(l); row = 5'(r); col = 5'(c); wdata = 8'($urandom);
      model[l][r*T_CI + c] = wdata;
      @(negedge clk); we = 0;
      checks++;
      if (tile[l][r*T_CI + c] !== wdata) begin failures++; $display("FAIL %0d %0d %0d", l, r, c); end
    end
    foreach (model[l, e]) begin
      checks++; if (tile[l][e] !== model[l][e]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
