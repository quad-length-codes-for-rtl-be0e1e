// qlc_lut_loader -- fills the encoder and decoder LUTs of one tensor type.
//
// The caller first pulses `start` with the table number and the coding
// scheme id, then streams the 256 input symbols in order of decreasing
// probability (sym_valid/sym_ready; sym_ready is high while loading). The
// k-th symbol streamed is given mapped symbol k. For each one the loader
// writes, in the same cycle,
//   encoder LUT[table][symbol] = code of k under the scheme (qlc_code_assign)
//   decoder LUT[table][k]      = symbol
// so the encoder table ends up indexed by the input symbol in ordinal
// order, as the paper describes, and the decoder table by the encoded
// symbol. The scheme id of the table is written on `start`. `done` pulses
// the cycle after the 256th write; loading takes 256 cycles. Sorting the
// histogram is not done here: the paper obtains the order a priori. The
// start/stream handshake is this design's choice; a start while busy
// restarts the load. The loader does not check that the 256 symbols are
// distinct.
module qlc_lut_loader
  import qlc_pkg::*;
#(
  parameter int unsigned NUM_TABLES = 8,
  localparam int unsigned TAB_W = (NUM_TABLES > 1) ? $clog2(NUM_TABLES) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // command
  input  logic             start,
  input  logic [TAB_W-1:0] start_table,
  input  scheme_id_t       start_scheme,
  input  logic             sym_valid,
  output logic             sym_ready,
  input  sym_t             sym,
  output logic             busy,
  output logic             done,
  // scheme register write (per table)
  output logic             sch_we,
  output logic [TAB_W-1:0] sch_table,
  output scheme_id_t       sch_id,
  // encoder LUT write
  output logic             enc_we,
  output logic [TAB_W-1:0] enc_table,
  output sym_t             enc_addr,
  output enc_entry_t       enc_data,
  // decoder LUT write
  output logic             dec_we,
  output logic [TAB_W-1:0] dec_table,
  output sym_t             dec_addr,
  output sym_t             dec_data
);

  logic [TAB_W-1:0] table_q;
  scheme_id_t       scheme_q;
  sym_t             rank_q;
  code_t            code;
  len_t             len;
  logic             write;

  qlc_code_assign u_assign (
    .scheme (scheme_q),
    .rank   (rank_q),
    .code   (code),
    .len    (len)
  );

  assign sym_ready = busy;
  assign write     = busy && sym_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      table_q  <= '0;
      scheme_q <= '0;
      rank_q   <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy     <= 1'b1;
        table_q  <= start_table;
        scheme_q <= start_scheme;
        rank_q   <= '0;
      end else if (write) begin
        rank_q <= rank_q + 1'b1;
        if (rank_q == sym_t'(NUM_SYMBOLS-1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign sch_we    = start;
  assign sch_table = start_table;
  assign sch_id    = start_scheme;

  assign enc_we    = write;
  assign enc_table = table_q;
  assign enc_addr  = sym;
  assign enc_data  = '{len: len, code: code};

  assign dec_we    = write;
  assign dec_table = table_q;
  assign dec_addr  = rank_q;
  assign dec_data  = sym;

endmodule
