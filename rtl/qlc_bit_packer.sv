// qlc_bit_packer -- concatenates variable length codes into fixed width words.
//
// Codes (right aligned, up to 11 bits, with their length) arrive on a
// valid/ready stream and are appended MSB first to a 2*WORD_W bit
// accumulator, so the first bit of the first code is bit WORD_W-1 of the
// first word. Whenever WORD_W bits are held, a word is offered on the
// output stream. A code marked `in_last` ends the block: the accumulator is
// then flushed, the final word being padded with zeros, flagged out_last
// and carrying in out_bits how many of its bits (counted from the MSB) are
// code bits, 1..WORD_W. New codes are refused during the flush.
// Throughput: one code per cycle while out_ready is high (at most 11 bits
// in, WORD_W bits out per cycle). Latency: a word is offered the cycle
// after the code that completes it is accepted.
// The paper implies a bit stream that the decoder reads from the front; the
// word width, bit order, padding and end-of-block marking are this
// design's choices.
module qlc_bit_packer
  import qlc_pkg::*;
#(
  parameter int unsigned WORD_W = 32,
  localparam int unsigned ACC_W = 2 * WORD_W,
  localparam int unsigned CNT_W = $clog2(ACC_W + 1),
  localparam int unsigned BITS_W = $clog2(WORD_W + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  code_t             in_code,
  input  len_t              in_len,
  input  logic              in_last,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [WORD_W-1:0] out_data,
  output logic              out_last,
  output logic [BITS_W-1:0] out_bits
);

  logic [ACC_W-1:0] acc_q, acc_pop, acc_d;
  logic [CNT_W-1:0] cnt_q, cnt_pop, cnt_d;
  logic             flush_q, flush_d;
  logic             push, pop;

  // room for a longest code without counting on a word leaving
  assign in_ready  = !flush_q && (cnt_q <= CNT_W'(ACC_W - MAX_CODE_W));
  assign push      = in_valid && in_ready;
  assign out_valid = (cnt_q >= CNT_W'(WORD_W)) || (flush_q && cnt_q != '0);
  assign out_last  = flush_q && (cnt_q <= CNT_W'(WORD_W));
  assign out_data  = acc_q[ACC_W-1 -: WORD_W];
  assign out_bits  = out_last ? BITS_W'(cnt_q) : BITS_W'(WORD_W);
  assign pop       = out_valid && out_ready;

  always_comb begin
    acc_pop = pop ? (acc_q << WORD_W) : acc_q;
    cnt_pop = pop ? ((cnt_q > CNT_W'(WORD_W)) ? cnt_q - CNT_W'(WORD_W) : '0) : cnt_q;
    acc_d   = acc_pop;
    cnt_d   = cnt_pop;
    flush_d = flush_q;
    if (pop && out_last) flush_d = 1'b0;
    if (push) begin
      // place the code just below the bits already held
      acc_d   = acc_pop | ((ACC_W'(in_code) << (ACC_W - int'(in_len))) >> cnt_pop);
      cnt_d   = cnt_pop + CNT_W'(in_len);
      flush_d = in_last;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q   <= '0;
      cnt_q   <= '0;
      flush_q <= 1'b0;
    end else begin
      acc_q   <= acc_d;
      cnt_q   <= cnt_d;
      flush_q <= flush_d;
    end
  end

  // a word on offer must stay on offer, unchanged, until taken
  property p_out_stable;
    @(posedge clk) disable iff (!rst_n)
      out_valid && !out_ready |=> out_valid && $stable(out_data) && $stable(out_last);
  endproperty
  a_out_stable: assert property (p_out_stable);
  a_len_legal: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> in_len >= len_t'(1) && in_len <= len_t'(MAX_CODE_W));

endmodule
