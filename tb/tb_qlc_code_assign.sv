// tb_qlc_code_assign -- checks every mapped symbol of both schemes.
//
// Compares code and length with the reference model and with the codes
// printed in the encoder table example (mapped symbols 0, 1, 2, 8, 253,
// 254, 255 under the first scheme).
module tb_qlc_code_assign;
  import qlc_pkg::*;
  import tb_qlc_ref_pkg::*;

  scheme_id_t scheme;
  sym_t       rank;
  code_t      code;
  len_t       len;
  int         checks = 0, failures = 0;

  qlc_code_assign dut (.scheme(scheme), .rank(rank), .code(code), .len(len));

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
    int rc, rl;
    int len_hist[16];
    for (int s = 0; s < 2; s++) begin
      foreach (len_hist[i]) len_hist[i] = 0;
      for (int r = 0; r < 256; r++) begin
        scheme = scheme_id_t'(s);
        rank   = sym_t'(r);
        #1;
        ref_code(s, r, rc, rl);
        check(int'(code) == rc && int'(len) == rl,
              $sformatf("scheme %0d rank %0d: got %b/%0d want %b/%0d", s, r, code, len, rc, rl));
        len_hist[len]++;
      end
      // the four code lengths of each scheme and how many symbols use them
      if (s == 0) check(len_hist[6] == 40 && len_hist[7] == 16 && len_hist[8] == 32 && len_hist[11] == 168,
                        "scheme 0 length histogram");
      else        check(len_hist[4] == 2 && len_hist[6] == 32 && len_hist[8] == 64 && len_hist[11] == 158,
                        "scheme 1 length histogram");
    end
    // printed examples of the encoder table (scheme 0)
    scheme = '0;
    rank = 8'd0;   #1; check(code == 11'b000000 && len == 6, "0 -> 000_000");
    rank = 8'd1;   #1; check(code == 11'b000001 && len == 6, "1 -> 000_001");
    rank = 8'd2;   #1; check(code == 11'b000010 && len == 6, "2 -> 000_010");
    rank = 8'd8;   #1; check(code == 11'b001000 && len == 6, "8 -> 001_000");
    rank = 8'd253; #1; check(code == 11'b11111111101 && len == 11, "253 -> 111_11111101");
    rank = 8'd254; #1; check(code == 11'b11111111110 && len == 11, "254 -> 111_11111110");
    rank = 8'd255; #1; check(code == 11'b11111111111 && len == 11, "255 -> 111_11111111");
    rank = 8'd34;  #1; check(code == 11'b100010 && len == 6, "34 -> 100_010");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
