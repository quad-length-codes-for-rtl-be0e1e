// qlc_code_assign -- quad length code of a mapped symbol.
//
// Combinational. Given a mapped symbol (0 = most probable) and a coding
// scheme id, finds the area that holds the symbol (the highest area whose
// first symbol is not above it), and forms the code as the 3-bit area code
// followed by nbits symbol bits equal to (symbol - offset). The code is
// returned right aligned in an 11-bit field with its length (3 + nbits).
// Example (scheme 0): mapped symbol 8 -> 001_000 (length 6), 253 ->
// 111_11111101 (length 11). The area boundaries and symbol bit counts are
// the paper's Tables 1 and 2; the right-aligned code format is this
// design's choice.
module qlc_code_assign
  import qlc_pkg::*;
(
  input  scheme_id_t scheme,
  input  sym_t       rank,
  output code_t      code,
  output len_t       len
);

  scheme_t          sch;
  logic [AREA_W-1:0] area;
  logic [7:0]        idx;

  always_comb begin
    sch  = scheme_of(scheme);
    area = '0;
    for (int a = 1; a < NUM_AREAS; a++) begin
      if (rank >= sch[a].base) area = AREA_W'(a);
    end
    idx  = rank - sch[area].offset;
    len  = len_t'(AREA_W) + sch[area].nbits;
    code = (code_t'(area) << sch[area].nbits) | code_t'(idx);
  end

endmodule
