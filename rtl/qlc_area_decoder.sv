// qlc_area_decoder -- decodes the quad length code at the head of a bit window.
//
// Combinational. The window holds the next 11 unread bits of the stream,
// MSB first. The top 3 bits are the area code; it selects the number of
// symbol bits (and so the code length, 3 + nbits) from the coding scheme.
// The symbol bits are the nbits bits that follow the area code; adding the
// area's offset to them gives the encoded (mapped) symbol, which the
// decoder LUT then turns into the output symbol. Example (scheme 0): area
// 100 with symbol bits 010 gives 32 + 2 = 34. This is the paper's decoding
// procedure. The last area carries the mapped symbol verbatim (offset 0);
// a code there whose value is below the area's first symbol cannot be
// produced by the encoder and is flagged on `invalid` (this design's
// addition).
module qlc_area_decoder
  import qlc_pkg::*;
(
  input  scheme_id_t            scheme,
  input  logic [MAX_CODE_W-1:0] window,
  output len_t                  len,
  output sym_t                  rank,
  output logic                  invalid
);

  scheme_t           sch;
  logic [AREA_W-1:0] area;
  logic [7:0]        idx;

  always_comb begin
    sch     = scheme_of(scheme);
    area    = window[MAX_CODE_W-1 -: AREA_W];
    // symbol bits sit just below the area code; shift out the unused tail
    idx     = window[MAX_CODE_W-AREA_W-1:0] >> (4'd8 - sch[area].nbits);
    len     = len_t'(AREA_W) + sch[area].nbits;
    rank    = idx + sch[area].offset;
    invalid = (area == AREA_W'(NUM_AREAS-1)) && (rank < sch[area].base);
  end

endmodule
