// qlc_pkg -- types and constants shared by the quad length codec.
//
// A quad length code is a 3-bit area code followed by a fixed number of
// symbol bits that depends on the area. The 256 mapped symbols (symbols
// renumbered 0..255 in order of decreasing probability) are split into 8
// contiguous areas. An area is described by:
//   nbits  number of symbol bits after the area code (code length = 3+nbits)
//   base   first mapped symbol of the area
//   offset value added to the symbol bits by the decoder
// For the first seven areas offset equals base. The last area carries the
// mapped symbol verbatim in its 8 symbol bits (the encoder table example
// codes mapped symbol 253 as 111_11111101), so its offset is 0 and the
// code points below its base are never produced by the encoder.
//
// Two schemes are built in, both taken from the paper:
//   SCHEME_FFN1 (id 0): areas of 8,8,8,8,8,16,32,168 symbols, lengths 6/7/8/11
//   SCHEME_FFN2 (id 1): areas of 2,8,8,8,8,32,32,158 symbols, lengths 4/6/8/11
package qlc_pkg;

  localparam int unsigned NUM_SYMBOLS = 256;  // e4m3: all 256 encodings
  localparam int unsigned SYM_W       = 8;
  localparam int unsigned AREA_W      = 3;    // area code bits
  localparam int unsigned NUM_AREAS   = 8;
  localparam int unsigned MAX_CODE_W  = 11;   // 3 + 8
  localparam int unsigned LEN_W       = 4;    // holds 1..11
  localparam int unsigned SCHEME_W    = 1;

  typedef logic [SYM_W-1:0]      sym_t;
  typedef logic [MAX_CODE_W-1:0] code_t;   // right aligned, area code first
  typedef logic [LEN_W-1:0]      len_t;
  typedef logic [SCHEME_W-1:0]   scheme_id_t;

  // One entry of the encoder look-up table.
  typedef struct packed {
    len_t  len;
    code_t code;
  } enc_entry_t;

  typedef struct packed {
    logic [3:0] nbits;
    logic [7:0] base;
    logic [7:0] offset;
  } area_t;

  typedef area_t [NUM_AREAS-1:0] scheme_t;   // index = area code

  // Table 1: FFN1 activation scheme.
  localparam scheme_t SCHEME_FFN1 = '{
    7: '{nbits: 4'd8, base: 8'd88, offset: 8'd0},
    6: '{nbits: 4'd5, base: 8'd56, offset: 8'd56},
    5: '{nbits: 4'd4, base: 8'd40, offset: 8'd40},
    4: '{nbits: 4'd3, base: 8'd32, offset: 8'd32},
    3: '{nbits: 4'd3, base: 8'd24, offset: 8'd24},
    2: '{nbits: 4'd3, base: 8'd16, offset: 8'd16},
    1: '{nbits: 4'd3, base: 8'd8,  offset: 8'd8},
    0: '{nbits: 4'd3, base: 8'd0,  offset: 8'd0}
  };

  // Table 2: FFN2 activation scheme (adapted to a distribution dominated by zero).
  localparam scheme_t SCHEME_FFN2 = '{
    7: '{nbits: 4'd8, base: 8'd98, offset: 8'd0},
    6: '{nbits: 4'd5, base: 8'd66, offset: 8'd66},
    5: '{nbits: 4'd5, base: 8'd34, offset: 8'd34},
    4: '{nbits: 4'd3, base: 8'd26, offset: 8'd26},
    3: '{nbits: 4'd3, base: 8'd18, offset: 8'd18},
    2: '{nbits: 4'd3, base: 8'd10, offset: 8'd10},
    1: '{nbits: 4'd3, base: 8'd2,  offset: 8'd2},
    0: '{nbits: 4'd1, base: 8'd0,  offset: 8'd0}
  };

  function automatic scheme_t scheme_of(scheme_id_t id);
    return (id == scheme_id_t'(1)) ? SCHEME_FFN2 : SCHEME_FFN1;
  endfunction

endpackage
