// tb_codr_sram: writes random words to a small SRAM, reads them back and
// checks the data and the one-cycle read latency (rdata holds between reads).
module tb_codr_sram;
  localparam int unsigned WORDS = 64, WIDTH = 24;
  logic clk = 0, we = 0, re = 0;
  logic [19:0] waddr = 0, raddr = 0;
  logic [WIDTH-1:0] wdata = 0, rdata;
  logic [WIDTH-1:0] model [WORDS];
  int checks = 0, failures = 0;

  codr_sram #(.WORDS(WORDS), .WIDTH(WIDTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < int'(WORDS); i++) begin
      @(negedge clk); we = 1; waddr = 20'(i); wdata = WIDTH'($urandom); model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 200; k++) begin
      automatic int a = $urandom % WORDS;
      @(negedge clk); re = 1; raddr = 20'(a);
      @(negedge clk); re = 0; raddr = 20'($urandom % WORDS);
      checks++; if (rdata !== model[a]) begin failures++; $display("FAIL read %0d", a); end
      @(negedge clk);
      checks++; if (rdata !== model[a]) begin failures++; $display("FAIL hold %0d", a); end
      // simultaneous write to another word does not disturb the read
      if (k % 4 == 0) begin
        automatic int b = (a + 1) % WORDS;
        we = 1; waddr = 20'(b); wdata = WIDTH'($urandom); model[b] = wdata;
        @(negedge clk); we = 0;
      end
    end
    // out-of-range write ignored, out-of-range read returns zero
    @(negedge clk); we = 1; waddr = 20'(WORDS + 3); wdata = '1;
    @(negedge clk); we = 0; re = 1; raddr = 20'(WORDS + 3);
    @(negedge clk); re = 0;
    checks++; if (rdata !== '0) begin failures++; $display("FAIL out of range"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
