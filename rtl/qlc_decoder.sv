// qlc_decoder -- quad length decoder, one symbol per cycle.
//
// A block of compressed words arrives with the number of the table (tensor
// type) it was coded with, sampled with its first word. qlc_bit_unpacker
// shows the next 11 unread bits; qlc_area_decoder reads the 3-bit area
// code, which gives the code length, takes the symbol bits and adds the
// area offset to form the encoded symbol; the code is consumed in the same
// cycle. The encoded symbol then indexes the decoder LUT of the table,
// whose registered output is the decoded symbol, valid one cycle later.
// So no bit-serial tree walk is needed: one whole code is decoded per
// cycle, whatever its length, which is the paper's point. The coding scheme
// of each table (0 = Table 1, 1 = Table 2) is held in a small register
// file written by qlc_lut_loader; it resets to scheme 0. `out_last` marks
// the last symbol of a block; `out_invalid` flags a code of the last area
// that no encoder produces. Handshakes, latency and the error flag are
// this design's choices.
module qlc_decoder
  import qlc_pkg::*;
#(
  parameter int unsigned NUM_TABLES = 8,
  parameter int unsigned WORD_W = 32,
  localparam int unsigned TAB_W = (NUM_TABLES > 1) ? $clog2(NUM_TABLES) : 1,
  localparam int unsigned BITS_W = $clog2(WORD_W + 1),
  localparam int unsigned CNT_W = $clog2(2 * WORD_W + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // LUT and scheme register write
  input  logic              lut_we,
  input  logic [TAB_W-1:0]  lut_wtable,
  input  sym_t              lut_waddr,
  input  sym_t              lut_wdata,
  input  logic              sch_we,
  input  logic [TAB_W-1:0]  sch_table,
  input  scheme_id_t        sch_id,
  // compressed words in
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [WORD_W-1:0] in_data,
  input  logic              in_last,
  input  logic [BITS_W-1:0] in_bits,
  input  logic [TAB_W-1:0]  in_table,
  // symbols out
  output logic              out_valid,
  input  logic              out_ready,
  output sym_t              out_sym,
  output logic              out_last,
  output logic              out_invalid
);

  scheme_id_t            scheme_q [NUM_TABLES];
  logic [TAB_W-1:0]      table_q, table_cur;
  logic                  in_blk_q;   // a block is in progress
  logic [MAX_CODE_W-1:0] window;
  logic [CNT_W-1:0]      avail;
  logic                  final_blk;
  len_t                  len;
  sym_t                  rank;
  logic                  invalid;
  logic                  fire, can_go, up_ready;

  // the table of the block: taken from the first word, held to the end
  assign table_cur = in_blk_q ? table_q : in_table;

  qlc_bit_unpacker #(.WORD_W(WORD_W)) u_unpack (
    .clk         (clk),
    .rst_n       (rst_n),
    .in_valid    (in_valid),
    .in_ready    (up_ready),
    .in_data     (in_data),
    .in_last     (in_last),
    .in_bits     (in_bits),
    .window      (window),
    .avail       (avail),
    .final_blk   (final_blk),
    .consume     (fire),
    .consume_len (len)
  );
  assign in_ready = up_ready;

  qlc_area_decoder u_area (
    .scheme  (scheme_q[table_q]),
    .window  (window),
    .len     (len),
    .rank    (rank),
    .invalid (invalid)
  );

  // a code can be taken once its area code and all its symbol bits are held
  assign can_go = (avail >= CNT_W'(AREA_W)) && (CNT_W'(len) <= avail);
  assign fire   = can_go && (!out_valid || out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_blk_q <= 1'b0;
      table_q  <= '0;
      for (int t = 0; t < NUM_TABLES; t++) scheme_q[t] <= '0;
    end else begin
      if (sch_we) scheme_q[sch_table] <= sch_id;
      if (in_valid && up_ready) begin
        table_q  <= table_cur;
        in_blk_q <= !in_last;
      end
    end
  end

  qlc_decoder_lut #(.NUM_TABLES(NUM_TABLES)) u_lut (
    .clk    (clk),
    .we     (lut_we),
    .wtable (lut_wtable),
    .waddr  (lut_waddr),
    .wdata  (lut_wdata),
    .re     (fire),
    .rtable (table_q),
    .raddr  (rank),
    .rdata  (out_sym)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_last    <= 1'b0;
      out_invalid <= 1'b0;
    end else if (!out_valid || out_ready) begin
      out_valid   <= fire;
      out_last    <= fire && final_blk && (CNT_W'(len) == avail);
      out_invalid <= fire && invalid;
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_sym));

endmodule
