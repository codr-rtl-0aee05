// codr_bit_fifo: variable-width bit stream buffer, one stream of the Weight RF.
//
// Words of WW bits are appended at the write end (push, when `ready`); the
// decoder sees the oldest PEEK bits on `peek` (peek[0] is the oldest bit)
// and consumes pop_n of them with `pop`. Functionally this is the shift
// register of the paper's Weight RF ("Shift En.", "Shift No."); here it is a
// circular buffer of DEPTH bits with read and write pointers, so a shift is
// a pointer update. `clr` empties the buffer (start of a new cycle of the
// Iteration, dropping padding bits of the previous stream). Push and pop may
// happen in the same cycle. DEPTH must be a power of two.
module codr_bit_fifo #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned WW    = 32,
  parameter int unsigned PEEK  = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clr,
  input  logic                      push,
  input  logic [WW-1:0]             wdata,
  output logic                      ready,
  output logic [PEEK-1:0]           peek,
  output logic [$clog2(DEPTH):0]    avail,
  input  logic                      pop,
  input  logic [$clog2(PEEK):0]     pop_n
);
  localparam int unsigned PW_ = $clog2(DEPTH);

  logic [DEPTH-1:0] mem;
  logic [PW_-1:0]   rd, wr;
  logic [PW_:0]     cnt;

  assign avail = cnt;
  assign ready = (cnt + (PW_+1)'(WW)) <= (PW_+1)'(DEPTH);

  always_comb begin
    for (int i = 0; i < int'(PEEK); i++) peek[i] = mem[PW_'(rd + PW_'(i))];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd  <= '0;
      wr  <= '0;
      cnt <= '0;
    end else if (clr) begin
      rd  <= '0;
      wr  <= '0;
      cnt <= '0;
    end else begin
      if (push && ready) wr <= wr + PW_'(WW);
      if (pop) rd <= rd + PW_'(pop_n);
      cnt <= cnt + ((push && ready) ? (PW_+1)'(WW) : '0) - (pop ? (PW_+1)'(pop_n) : '0);
    end
  end

  always_ff @(posedge clk) begin
    if (push && ready && !clr)
      for (int i = 0; i < int'(WW); i++) mem[PW_'(wr + PW_'(i))] <= wdata[i];
  end

  // A pop may never take more bits than the buffer holds.
  assert property (@(posedge clk) disable iff (!rst_n) (pop && !clr) |-> (PW_+1)'(pop_n) <= cnt)
    else $error("codr_bit_fifo: pop of %0d bits with %0d held", pop_n, cnt);
endmodule
