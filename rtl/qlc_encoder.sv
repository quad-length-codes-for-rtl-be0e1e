// qlc_encoder -- quad length encoder: LUT lookup followed by bit packing.
//
// Each input symbol (an e4m3 byte) arrives with the number of the table
// (tensor type) it is to be coded with and a `last` flag that ends the
// block. Stage 1 reads the code and length of the symbol from the encoder
// LUT of that table; qlc_bit_packer then appends the code to the word
// stream. Encoding is thus a single table read per symbol, as in the
// paper. Throughput is one symbol per cycle; the first word of a block
// leaves a few cycles after its symbols enter (one cycle of LUT read, one
// of packing, plus the symbols needed to fill a word). The LUT write port
// is brought out for qlc_lut_loader. The pipeline register with
// backpressure is this design's choice.
module qlc_encoder
  import qlc_pkg::*;
#(
  parameter int unsigned NUM_TABLES = 8,
  parameter int unsigned WORD_W = 32,
  localparam int unsigned TAB_W = (NUM_TABLES > 1) ? $clog2(NUM_TABLES) : 1,
  localparam int unsigned BITS_W = $clog2(WORD_W + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // LUT write
  input  logic              lut_we,
  input  logic [TAB_W-1:0]  lut_wtable,
  input  sym_t              lut_waddr,
  input  enc_entry_t        lut_wdata,
  // symbols in
  input  logic              in_valid,
  output logic              in_ready,
  input  sym_t              in_sym,
  input  logic [TAB_W-1:0]  in_table,
  input  logic              in_last,
  // compressed words out
  output logic              out_valid,
  input  logic              out_ready,
  output logic [WORD_W-1:0] out_data,
  output logic              out_last,
  output logic [BITS_W-1:0] out_bits
);

  logic       s1_valid, s1_last;
  enc_entry_t s1_entry;
  logic       pk_ready;
  logic       advance;

  // stage 1 may load a new symbol when it is empty or its symbol moves on
  assign advance  = !s1_valid || pk_ready;
  assign in_ready = advance;

  qlc_encoder_lut #(.NUM_TABLES(NUM_TABLES)) u_lut (
    .clk    (clk),
    .we     (lut_we),
    .wtable (lut_wtable),
    .waddr  (lut_waddr),
    .wdata  (lut_wdata),
    .re     (in_valid && advance),
    .rtable (in_table),
    .raddr  (in_sym),
    .rdata  (s1_entry)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_last  <= 1'b0;
    end else if (advance) begin
      s1_valid <= in_valid;
      s1_last  <= in_last;
    end
  end

  qlc_bit_packer #(.WORD_W(WORD_W)) u_pack (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (s1_valid),
    .in_ready  (pk_ready),
    .in_code   (s1_entry.code),
    .in_len    (s1_entry.len),
    .in_last   (s1_last),
    .out_valid (out_valid),
    .out_ready (out_ready),
    .out_data  (out_data),
    .out_last  (out_last),
    .out_bits  (out_bits)
  );

endmodule
