// tb_qlc_encoder -- symbols in, packed quad length codes out.
//
// Two tables are written through the LUT port from random symbol orders,
// one with each coding scheme. Blocks of random symbols, each with one of
// the two tables, are encoded; the reference stream is the concatenation
// of the reference codes of the symbols' ranks. Output words, last flags
// and last-word bit counts are compared with it. The first block runs with
// out_ready high and must accept one symbol per cycle; later blocks see
// random backpressure.
module tb_qlc_encoder;
  import qlc_pkg::*;
  import tb_qlc_ref_pkg::*;

  localparam int W = 32;
  localparam int NT = 8;

  logic         clk = 0, rst_n = 0;
  logic         lut_we = 0;
  logic [2:0]   lut_wtable = '0;
  sym_t         lut_waddr = '0;
  enc_entry_t   lut_wdata = '0;
  logic         in_valid = 0, in_ready, in_last = 0;
  sym_t         in_sym = '0;
  logic [2:0]   in_table = '0;
  logic         out_valid, out_ready = 0, out_last;
  logic [W-1:0] out_data;
  logic [5:0]   out_bits;

  int           order [NT][256];
  int           rank_of [NT][256];
  int           scheme_of_tab [NT];
  bit           ref_q[$];
  int           blk_bits[$];
  bit           blk_done[$];
  int           checks = 0, failures = 0, words = 0, lasts = 0, stalls = 0, total_bits = 0, total_syms = 0;
  bit           random_ready = 0;

  qlc_encoder dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  always @(negedge clk) if (rst_n) out_ready <= random_ready ? ($urandom_range(2, 0) != 0) : 1'b1;
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      bit last_exp;
      int n;
      logic [W-1:0] exp;
      last_exp = blk_bits.size() > 0 && blk_done[0] && blk_bits[0] <= W;
      n = last_exp ? blk_bits[0] : W;
      exp = '0;
      for (int i = 0; i < n; i++) exp[W-1-i] = ref_q.pop_front();
      check(out_data == exp, $sformatf("word %0d: got %h want %h", words, out_data, exp));
      check(out_last == last_exp, $sformatf("word %0d last %b", words, out_last));
      if (last_exp) begin
        check(int'(out_bits) == n, $sformatf("word %0d bits %0d want %0d", words, out_bits, n));
        void'(blk_bits.pop_front());
        void'(blk_done.pop_front());
        lasts++;
      end else if (blk_bits.size() > 0) blk_bits[0] -= W;
      words++;
    end
    if (rst_n && in_valid && !in_ready) stalls++;
  end

  task automatic load_table(int t, int s);
    int rc, rl;
    int o[256];
    random_order(o);
    foreach (o[i]) order[t][i] = o[i];
    scheme_of_tab[t] = s;
    for (int k = 0; k < 256; k++) begin
      rank_of[t][o[k]] = k;
      ref_code(s, k, rc, rl);
      @(negedge clk);
      lut_we = 1; lut_wtable = 3'(t); lut_waddr = sym_t'(o[k]);
      lut_wdata = '{len: len_t'(rl), code: code_t'(rc)};
    end
    @(negedge clk) lut_we = 0;
  endtask

  task automatic send_block(int t, int nsym);
    for (int k = 0; k < nsym; k++) begin
      int s = $urandom_range(255, 0);
      int rc, rl;
      ref_code(scheme_of_tab[t], rank_of[t][s], rc, rl);
      for (int i = rl - 1; i >= 0; i--) ref_q.push_back(rc[i]);
      if (k == 0) begin
        blk_bits.push_back(0);
        blk_done.push_back(0);
      end
      blk_bits[blk_bits.size() - 1] += rl;
      total_bits += rl;
      total_syms++;
      @(negedge clk);
      in_valid = 1; in_sym = sym_t'(s); in_table = 3'(t); in_last = (k == nsym - 1);
      #1;
      while (!in_ready) begin
        @(negedge clk);
        #1;
      end
      @(posedge clk);
    end
    blk_done[blk_done.size() - 1] = 1;
    @(negedge clk) in_valid = 0; in_last = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_table(1, 0);
    load_table(6, 1);
    t0 = $time;
    send_block(1, 300);
    check(($time - t0) / 10 == 301, $sformatf("300 symbols took %0d cycles", ($time - t0) / 10 - 1));
    check(stalls == 0, "no stall at full rate");
    random_ready = 1;
    for (int b = 0; b < 200; b++) send_block(($urandom_range(1, 0) == 0) ? 1 : 6, $urandom_range(50, 1));
    repeat (300) @(negedge clk);
    check(ref_q.size() == 0 && blk_bits.size() == 0, "all bits delivered");
    check(lasts == 201, $sformatf("%0d blocks ended", lasts));
    check(stalls > 0, "backpressure reached the input");
    $display("encoder: %0d symbols -> %0d bits, %0d words", total_syms, total_bits, words);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
