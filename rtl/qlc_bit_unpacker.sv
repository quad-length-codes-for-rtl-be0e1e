// qlc_bit_unpacker -- turns a word stream back into a bit window.
//
// Words arrive MSB first on a valid/ready stream, as produced by
// qlc_bit_packer; the last word of a block carries in_last and in_bits, the
// number of its leading bits that hold code. Words are appended to a
// 2*WORD_W bit buffer. The next MAX_CODE_W (11) unread bits are shown on
// `window` (MSB = oldest bit) with `avail`, the number of unread bits
// held, and `final_blk`, set once the block's last word is in the buffer.
// The consumer removes `consume_len` bits by raising `consume` (it must not
// take more than `avail`). A word is accepted while at most WORD_W bits are
// held and the block's last word has not been accepted; when the buffer of
// a final block runs empty the unpacker is ready for the next block.
// Throughput: with input words always available, one code of up to 11 bits
// can be consumed every cycle. The paper gives only the reading order
// (area code first, then the symbol bits); the buffering is this design's.
module qlc_bit_unpacker
  import qlc_pkg::*;
#(
  parameter int unsigned WORD_W = 32,
  localparam int unsigned ACC_W = 2 * WORD_W,
  localparam int unsigned CNT_W = $clog2(ACC_W + 1),
  localparam int unsigned BITS_W = $clog2(WORD_W + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [WORD_W-1:0]     in_data,
  input  logic                  in_last,
  input  logic [BITS_W-1:0]     in_bits,
  output logic [MAX_CODE_W-1:0] window,
  output logic [CNT_W-1:0]      avail,
  output logic                  final_blk,
  input  logic                  consume,
  input  len_t                  consume_len
);

  logic [ACC_W-1:0] acc_q, acc_c, acc_d;
  logic [CNT_W-1:0] cnt_q, cnt_c, cnt_d;
  logic             final_q, final_d;
  logic             take;
  logic [CNT_W-1:0] nbits_in;

  assign in_ready  = !final_q && (cnt_q <= CNT_W'(WORD_W));
  assign take      = in_valid && in_ready;
  assign window    = acc_q[ACC_W-1 -: MAX_CODE_W];
  assign avail     = cnt_q;
  assign final_blk = final_q;
  assign nbits_in  = in_last ? CNT_W'(in_bits) : CNT_W'(WORD_W);

  always_comb begin
    acc_c   = consume ? (acc_q << consume_len) : acc_q;
    cnt_c   = consume ? (cnt_q - CNT_W'(consume_len)) : cnt_q;
    acc_d   = acc_c;
    cnt_d   = cnt_c;
    final_d = final_q;
    if (final_q && cnt_c == '0) final_d = 1'b0;
    if (take) begin
      // keep only the code bits of the word, then append below the held bits
      acc_d   = acc_c | (({in_data, {WORD_W{1'b0}}} >> (ACC_W - int'(nbits_in)))
                          << (ACC_W - int'(nbits_in)) >> cnt_c);
      cnt_d   = cnt_c + nbits_in;
      final_d = in_last;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q   <= '0;
      cnt_q   <= '0;
      final_q <= 1'b0;
    end else begin
      acc_q   <= acc_d;
      cnt_q   <= cnt_d;
      final_q <= final_d;
    end
  end

  a_no_overdraw: assert property (@(posedge clk) disable iff (!rst_n)
    consume |-> CNT_W'(consume_len) <= cnt_q);
  a_word_bits: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && in_last |-> in_bits != '0 && in_bits <= BITS_W'(WORD_W));

endmodule
