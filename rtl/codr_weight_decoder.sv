// codr_weight_decoder: decoder of CoDR's customized run-length encoding.
//
// Three bit streams arrive from the Weight RF, oldest bit at position 0:
//  * repetition counts: plain cnt_bits-wide numbers;
//  * unique weight deltas: a code whose bit 0 is a flag. Flag 1: the next
//    wlp_bits bits are a low-precision delta (code length wlp_bits+1). Flag 0:
//    the next 8 bits are a full-precision delta in two's complement (code
//    length 9);
//  * indexes: flag 1: the next ilp_bits bits are added to the previous
//    index; flag 0: the next iabs_bits bits are the index itself.
// The Repetition Count register is loaded with an entry (take_entry, which
// also consumes the entry's delta) and counts down by one per index
// (take_idx); rep_zero is its "==0" output that moves the MPE to the next
// unique weight. The index register keeps the last index ("Reg." in the
// paper's figure); idx is 1-based and restarts from 0 on clr. All outputs
// except idx and rep_zero are combinational from the stream heads;
// entry_ok / idx_ok say whether enough bits are present to decode.
//
// Field layout, flags and the count-down follow the paper's encoding example
// and decoder figure. The bit-lengths are run-time inputs. Low-precision
// deltas are zero-extended (as in the paper's worked example) unless
// LP_SIGNED is set (the figure's "Sign Ext."). An entry with count 0 adds its
// delta but emits no index; the encoder uses it to split a gap larger than
// an 8-bit two's complement delta.
module codr_weight_decoder
  import codr_pkg::*;
#(
  parameter bit          LP_SIGNED = 1'b0,
  parameter int unsigned PEEK      = 16,
  parameter int unsigned BW        = 12    // width of the avail inputs
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clr,
  input  enc_cfg_t                enc,
  input  logic [PEEK-1:0]         peek_cnt, peek_dlt, peek_idx,
  input  logic [BW-1:0]           avail_cnt, avail_dlt, avail_idx,
  output logic                    pop_cnt, pop_dlt, pop_idx,
  output logic [$clog2(PEEK):0]   pop_n_cnt, pop_n_dlt, pop_n_idx,
  input  logic                    take_entry,
  input  logic                    take_idx,
  output logic                    entry_ok,
  output logic signed [DLW-1:0]   delta,
  output logic                    idx_ok,
  output logic [IDXW-1:0]         idx,
  output logic                    rep_zero
);
  logic [IDXW-1:0] rep_cnt;
  logic [IDXW-1:0] idx_reg;
  logic [4:0]      dlen, ilen;
  logic [15:0]     cnt_field, ilp_field, iabs_field;
  logic [IDXW-1:0] idx_next;

  always_comb begin
    cnt_field  = 16'(peek_cnt)        & ((16'd1 << enc.cnt_bits)  - 16'd1);
    ilp_field  = (16'(peek_idx) >> 1) & ((16'd1 << enc.ilp_bits)  - 16'd1);
    iabs_field = (16'(peek_idx) >> 1) & ((16'd1 << enc.iabs_bits) - 16'd1);
    delta      = dec_delta(16'(peek_dlt), enc.wlp_bits, LP_SIGNED);
    dlen       = delta_len(16'(peek_dlt), enc.wlp_bits);
    ilen       = peek_idx[0] ? 5'(enc.ilp_bits) + 5'd1 : 5'(enc.iabs_bits) + 5'd1;
    idx_next   = peek_idx[0] ? idx_reg + IDXW'(ilp_field) : IDXW'(iabs_field);

    entry_ok = (avail_cnt >= BW'(enc.cnt_bits)) && (avail_dlt != '0) && (avail_dlt >= BW'(dlen));
    idx_ok   = (avail_idx != '0) && (avail_idx >= BW'(ilen));

    pop_cnt   = take_entry;
    pop_n_cnt = ($clog2(PEEK)+1)'(enc.cnt_bits);
    pop_dlt   = take_entry;
    pop_n_dlt = ($clog2(PEEK)+1)'(dlen);
    pop_idx   = take_idx;
    pop_n_idx = ($clog2(PEEK)+1)'(ilen);
  end

  assign idx      = idx_reg;
  assign rep_zero = (rep_cnt == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rep_cnt <= '0;
      idx_reg <= '0;
    end else if (clr) begin
      rep_cnt <= '0;
      idx_reg <= '0;
    end else if (take_entry) begin
      rep_cnt <= IDXW'(cnt_field);
    end else if (take_idx) begin
      rep_cnt <= rep_cnt - 1'b1;
      idx_reg <= idx_next;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) take_entry |-> entry_ok)
    else $error("codr_weight_decoder: entry taken without enough bits");
  assert property (@(posedge clk) disable iff (!rst_n) take_idx |-> (idx_ok && !rep_zero))
    else $error("codr_weight_decoder: index taken when none is due");
endmodule
