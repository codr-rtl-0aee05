// codr_sram: on-chip SRAM of the accelerator (Input, Weight and Output SRAM).
//
// A synchronous memory with one write port and one read port. A write
// stores wdata at waddr on the rising edge; a read presents mem[raddr] on
// rdata one cycle after re. The array itself is not reset. The paper gives
// only the capacities (250 kB for input and output features, 200 kB for
// weights); the port structure, the one-cycle latency and the word widths
// are this design's choice. Addresses beyond WORDS are ignored on write and
// read back as zero.
module codr_sram #(
  parameter int unsigned WORDS = 1024,
  parameter int unsigned WIDTH = 32,
  parameter int unsigned AW    = 20
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  localparam int unsigned IW = $clog2(WORDS);
  logic [WIDTH-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we && waddr < AW'(WORDS)) mem[waddr[IW-1:0]] <= wdata;
    if (re) rdata <= (raddr < AW'(WORDS)) ? mem[raddr[IW-1:0]] : '0;
  end
endmodule
