// qlc_decoder_lut -- decoder look-up table, one 256-entry bank per tensor type.
//
// Indexed by {table, encoded symbol}; each entry holds the output symbol,
// i.e. the input symbol that had that rank in the sorted histogram. One
// write port (filled by qlc_lut_loader) and one read port with a registered
// output: rdata is valid the cycle after a read with re = 1 and holds
// otherwise. The 256 entries per table and the per-tensor-type tables
// follow the paper; the number of tables and the port timing are this
// design's choices. Contents are undefined until loaded.
module qlc_decoder_lut
  import qlc_pkg::*;
#(
  parameter int unsigned NUM_TABLES = 8,
  localparam int unsigned TAB_W = (NUM_TABLES > 1) ? $clog2(NUM_TABLES) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [TAB_W-1:0] wtable,
  input  sym_t             waddr,
  input  sym_t             wdata,
  input  logic             re,
  input  logic [TAB_W-1:0] rtable,
  input  sym_t             raddr,
  output sym_t             rdata
);

  sym_t mem [NUM_TABLES*NUM_SYMBOLS];

  function automatic int unsigned addr(logic [TAB_W-1:0] t, sym_t s);
    return int'(t) * NUM_SYMBOLS + int'(s);
  endfunction

  always_ff @(posedge clk) begin
    if (we) mem[addr(wtable, waddr)] <= wdata;
    if (re) rdata <= mem[addr(rtable, raddr)];
  end

endmodule
