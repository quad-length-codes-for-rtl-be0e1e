// qlc_codec -- quad length code compressor/decompressor for e4m3 data.
//
// The codec holds, for each of NUM_TABLES tensor types, an encoder LUT and a
// decoder LUT built from that type's symbol order, and the coding scheme
// (Table 1 or Table 2 of the paper) the type uses. Three parts share them:
//   qlc_lut_loader  fills both LUTs of one table from the 256 symbols in
//                   order of decreasing probability (load_* ports)
//   qlc_encoder     symbols -> packed code words (enc_* ports)
//   qlc_decoder     packed code words -> symbols (dec_* ports)
// The encoder output and decoder input are word streams meant for the link
// that carries the compressed traffic; they are separate ports so that one
// codec can compress what it sends and decompress what it receives. All
// streams use valid/ready; words are WORD_W bits, MSB first, and the last
// word of a block carries the number of its code bits. Both directions run
// at one symbol per cycle. Loading a table takes 256 cycles and must not
// overlap traffic that uses that table. The coding and the LUT organisation
// follow the paper; the table count, word format and handshakes are this
// design's choices.
module qlc_codec
  import qlc_pkg::*;
#(
  parameter int unsigned NUM_TABLES = 8,
  parameter int unsigned WORD_W = 32,
  localparam int unsigned TAB_W = (NUM_TABLES > 1) ? $clog2(NUM_TABLES) : 1,
  localparam int unsigned BITS_W = $clog2(WORD_W + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // table loading
  input  logic              load_start,
  input  logic [TAB_W-1:0]  load_table,
  input  scheme_id_t        load_scheme,
  input  logic              load_valid,
  output logic              load_ready,
  input  sym_t              load_sym,
  output logic              load_busy,
  output logic              load_done,
  // encoder: symbols in
  input  logic              enc_in_valid,
  output logic              enc_in_ready,
  input  sym_t              enc_in_sym,
  input  logic [TAB_W-1:0]  enc_in_table,
  input  logic              enc_in_last,
  // encoder: words out
  output logic              enc_out_valid,
  input  logic              enc_out_ready,
  output logic [WORD_W-1:0] enc_out_data,
  output logic              enc_out_last,
  output logic [BITS_W-1:0] enc_out_bits,
  // decoder: words in
  input  logic              dec_in_valid,
  output logic              dec_in_ready,
  input  logic [WORD_W-1:0] dec_in_data,
  input  logic              dec_in_last,
  input  logic [BITS_W-1:0] dec_in_bits,
  input  logic [TAB_W-1:0]  dec_in_table,
  // decoder: symbols out
  output logic              dec_out_valid,
  input  logic              dec_out_ready,
  output sym_t              dec_out_sym,
  output logic              dec_out_last,
  output logic              dec_out_invalid
);

  logic             sch_we, enc_we, dec_we;
  logic [TAB_W-1:0] sch_table, enc_table, dec_table;
  scheme_id_t       sch_id;
  sym_t             enc_addr, dec_addr, dec_data;
  enc_entry_t       enc_data;

  qlc_lut_loader #(.NUM_TABLES(NUM_TABLES)) u_loader (
    .clk          (clk),
    .rst_n        (rst_n),
    .start        (load_start),
    .start_table  (load_table),
    .start_scheme (load_scheme),
    .sym_valid    (load_valid),
    .sym_ready    (load_ready),
    .sym          (load_sym),
    .busy         (load_busy),
    .done         (load_done),
    .sch_we       (sch_we),
    .sch_table    (sch_table),
    .sch_id       (sch_id),
    .enc_we       (enc_we),
    .enc_table    (enc_table),
    .enc_addr     (enc_addr),
    .enc_data     (enc_data),
    .dec_we       (dec_we),
    .dec_table    (dec_table),
    .dec_addr     (dec_addr),
    .dec_data     (dec_data)
  );

  qlc_encoder #(.NUM_TABLES(NUM_TABLES), .WORD_W(WORD_W)) u_enc (
    .clk        (clk),
    .rst_n      (rst_n),
    .lut_we     (enc_we),
    .lut_wtable (enc_table),
    .lut_waddr  (enc_addr),
    .lut_wdata  (enc_data),
    .in_valid   (enc_in_valid),
    .in_ready   (enc_in_ready),
    .in_sym     (enc_in_sym),
    .in_table   (enc_in_table),
    .in_last    (enc_in_last),
    .out_valid  (enc_out_valid),
    .out_ready  (enc_out_ready),
    .out_data   (enc_out_data),
    .out_last   (enc_out_last),
    .out_bits   (enc_out_bits)
  );

  qlc_decoder #(.NUM_TABLES(NUM_TABLES), .WORD_W(WORD_W)) u_dec (
    .clk         (clk),
    .rst_n       (rst_n),
    .lut_we      (dec_we),
    .lut_wtable  (dec_table),
    .lut_waddr   (dec_addr),
    .lut_wdata   (dec_data),
    .sch_we      (sch_we),
    .sch_table   (sch_table),
    .sch_id      (sch_id),
    .in_valid    (dec_in_valid),
    .in_ready    (dec_in_ready),
    .in_data     (dec_in_data),
    .in_last     (dec_in_last),
    .in_bits     (dec_in_bits),
    .in_table    (dec_in_table),
    .out_valid   (dec_out_valid),
    .out_ready   (dec_out_ready),
    .out_sym     (dec_out_sym),
    .out_last    (dec_out_last),
    .out_invalid (dec_out_invalid)
  );

endmodule
