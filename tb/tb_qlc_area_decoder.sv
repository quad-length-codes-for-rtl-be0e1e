// tb_qlc_area_decoder -- decodes every code of both schemes.
//
// Each reference code is placed at the top of the 11-bit window with random
// bits after it; the decoder must return the code length and the mapped
// symbol. Also checks the worked example (area 100, bits 010 -> 34) and
// the invalid flag on last-area codes below the area's first symbol.
module tb_qlc_area_decoder;
  import qlc_pkg::*;
  import tb_qlc_ref_pkg::*;

  scheme_id_t            scheme;
  logic [MAX_CODE_W-1:0] window;
  len_t                  len;
  sym_t                  rank;
  logic                  invalid;
  int                    checks = 0, failures = 0;

  qlc_area_decoder dut (.scheme(scheme), .window(window), .len(len), .rank(rank), .invalid(invalid));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rc, rl, tail;
    for (int s = 0; s < 2; s++) begin
      for (int r = 0; r < 256; r++) begin
        ref_code(s, r, rc, rl);
        for (int k = 0; k < 3; k++) begin
          tail   = (rl == 11) ? 0 : int'($urandom_range((1 << (11 - rl)) - 1, 0));
          scheme = scheme_id_t'(s);
          window = MAX_CODE_W'((rc << (11 - rl)) | tail);
          #1;
          check(int'(len) == rl && int'(rank) == r && !invalid,
                $sformatf("scheme %0d rank %0d window %b: got len %0d rank %0d inv %b",
                          s, r, window, len, rank, invalid));
        end
      end
    end
    scheme = '0;
    window = 11'b100_010_10110;
    #1; check(rank == 8'd34 && len == 6, "area 100 bits 010 -> 34");
    window = 11'b111_01010111;   // 87 < 88: never produced
    #1; check(invalid, "scheme 0 last area below 88 flagged");
    scheme = 1'b1;
    window = 11'b111_01100001;   // 97 < 98
    #1; check(invalid, "scheme 1 last area below 98 flagged");
    window = 11'b000_1_0000000;
    #1; check(len == 4 && rank == 8'd1, "scheme 1 area 000 is 4 bits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
