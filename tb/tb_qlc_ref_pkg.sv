// tb_qlc_ref_pkg -- reference model of quad length coding for the testbenches.
//
// Written from the coding tables (area sizes and symbol bit counts), not
// from the RTL package: a mapped symbol's area is found by walking the
// area sizes, its code is the area number followed by its index in the
// area, except in the last area where the 8 symbol bits are the mapped
// symbol itself. Also holds a bit queue used to model the packed stream.
package tb_qlc_ref_pkg;

  // per scheme: number of symbols and symbol bits of each of the 8 areas
  function automatic int area_size(int scheme, int a);
    int s1[8] = '{8, 8, 8, 8, 8, 16, 32, 168};
    int s2[8] = '{2, 8, 8, 8, 8, 32, 32, 158};
    return scheme == 0 ? s1[a] : s2[a];
  endfunction

  function automatic int area_bits(int scheme, int a);
    int b1[8] = '{3, 3, 3, 3, 3, 4, 5, 8};
    int b2[8] = '{1, 3, 3, 3, 3, 5, 5, 8};
    return scheme == 0 ? b1[a] : b2[a];
  endfunction

  // code of a mapped symbol, right aligned, and its length
  function automatic void ref_code(int scheme, int rank, output int code, output int len);
    int first = 0;
    for (int a = 0; a < 8; a++) begin
      if (rank < first + area_size(scheme, a)) begin
        int idx = (a == 7) ? rank : rank - first;
        len  = 3 + area_bits(scheme, a);
        code = (a << area_bits(scheme, a)) | idx;
        return;
      end
      first += area_size(scheme, a);
    end
    code = -1;
    len  = -1;
  endfunction

  // random permutation of 0..255: a symbol order for a table
  function automatic void random_order(output int order[256]);
    for (int i = 0; i < 256; i++) order[i] = i;
    for (int i = 255; i > 0; i--) begin
      int j = $urandom_range(i, 0);
      int t = order[i];
      order[i] = order[j];
      order[j] = t;
    end
  endfunction

endpackage
