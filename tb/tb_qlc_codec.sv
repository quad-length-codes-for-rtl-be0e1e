// tb_qlc_codec -- end-to-end test of the codec at its default size.
//
// All 8 tables are loaded through the loader from random symbol orders,
// alternately with scheme 0 and scheme 1; table 3 is later reloaded with
// the other scheme. Symbol blocks are encoded, the words go through a
// model of the link (a queue with random gaps and stalls) into the
// decoder, and every decoded symbol must equal the symbol sent, with the
// block boundaries kept. Symbols are drawn from a skewed distribution over
// the ranks so that short codes dominate, as in activation data.
// The compressed size of every block must equal the sum of the reference
// code lengths, and the test reports the compressibility reached.
// Mechanisms that must each occur at least once (counted, failure if
// never): table load, reload that switches a table's scheme, blocks under
// each scheme, every code length of each scheme, encoder input stall,
// decoder input stall, decoder output stall, a last word exactly full, a
// last word partly full, a one-symbol block. A 1000-symbol block without
// stalls must pass end to end at one symbol per cycle.
module tb_qlc_codec;
  import qlc_pkg::*;
  import tb_qlc_ref_pkg::*;

  localparam int NT = 8;
  localparam int W = 32;

  logic         clk = 0, rst_n = 0;
  logic         load_start = 0, load_valid = 0, load_ready, load_busy, load_done;
  logic [2:0]   load_table = '0;
  scheme_id_t   load_scheme = '0;
  sym_t         load_sym = '0;
  logic         enc_in_valid = 0, enc_in_ready, enc_in_last = 0;
  sym_t         enc_in_sym = '0;
  logic [2:0]   enc_in_table = '0;
  logic         enc_out_valid, enc_out_ready = 0, enc_out_last;
  logic [W-1:0] enc_out_data;
  logic [5:0]   enc_out_bits;
  logic         dec_in_valid = 0, dec_in_ready, dec_in_last = 0;
  logic [W-1:0] dec_in_data = '0;
  logic [5:0]   dec_in_bits = '0;
  logic [2:0]   dec_in_table = '0;
  logic         dec_out_valid, dec_out_ready = 0, dec_out_last, dec_out_invalid;
  sym_t         dec_out_sym;

  qlc_codec dut (.*);

  // link model: words with their block's table
  typedef struct {
    logic [W-1:0] data;
    logic         last;
    logic [5:0]   bits;
    logic [2:0]   tab;
  } link_word_t;
  link_word_t link_q[$];
  int         blk_tab_q[$];    // table of each block, in encoder order

  int  rank_of [NT][256];
  int  scheme_of_tab [NT];
  int  exp_sym[$];
  bit  exp_last[$];
  int  exp_blk_bits[$];
  int  blk_bits_acc = 0;
  int  checks = 0, failures = 0, cycle = 0;
  bit  stalls_on = 1;
  int  first_out = -1, last_out = 0, nout = 0;
  longint sym_total = 0, bit_total = 0;

  // mechanism counters
  int n_load = 0, n_reload_switch = 0, n_blk_s0 = 0, n_blk_s1 = 0;
  int n_enc_stall = 0, n_dec_in_stall = 0, n_dec_out_stall = 0;
  int n_full_last = 0, n_part_last = 0, n_one_sym = 0, n_invalid = 0;
  int len_seen [2][16];

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // ---------------------------------------------------------------- link
  always @(negedge clk) if (rst_n) begin
    enc_out_ready <= stalls_on ? ($urandom_range(4, 0) != 0) : 1'b1;
    dec_out_ready <= stalls_on ? ($urandom_range(4, 0) != 0) : 1'b1;
  end
  always @(posedge clk) begin
    cycle++;
    if (rst_n && enc_out_valid && enc_out_ready) begin
      link_word_t lw;
      lw.data = enc_out_data;
      lw.last = enc_out_last;
      lw.bits = enc_out_bits;
      lw.tab  = 3'(blk_tab_q[0]);
      blk_bits_acc += enc_out_last ? int'(enc_out_bits) : W;
      if (enc_out_last) begin
        check(exp_blk_bits.size() > 0 && blk_bits_acc == exp_blk_bits[0],
              $sformatf("block compressed to %0d bits, want %0d", blk_bits_acc, exp_blk_bits[0]));
        bit_total += blk_bits_acc;
        void'(exp_blk_bits.pop_front());
        void'(blk_tab_q.pop_front());
        if (enc_out_bits == 6'(W)) n_full_last++;
        else n_part_last++;
        blk_bits_acc = 0;
      end
      link_q.push_back(lw);
    end
    if (rst_n && enc_in_valid && !enc_in_ready) n_enc_stall++;
    if (rst_n && dec_in_valid && !dec_in_ready) n_dec_in_stall++;
    if (rst_n && dec_out_valid && !dec_out_ready) n_dec_out_stall++;
    // decoded symbols
    if (rst_n && dec_out_valid && dec_out_ready) begin
      if (dec_out_invalid) n_invalid++;
      check(exp_sym.size() > 0, "unexpected decoded symbol");
      if (exp_sym.size() > 0) begin
        check(int'(dec_out_sym) == exp_sym[0] && dec_out_last == exp_last[0],
              $sformatf("decoded %0d/%b want %0d/%b", dec_out_sym, dec_out_last, exp_sym[0], exp_last[0]));
        void'(exp_sym.pop_front());
        void'(exp_last.pop_front());
      end
      if (first_out < 0) first_out = cycle;
      last_out = cycle;
      nout++;
    end
  end

  // link into the decoder, with random gaps
  initial begin
    link_word_t w;
    forever begin
      @(negedge clk);
      if (rst_n && link_q.size() > 0 && (!stalls_on || $urandom_range(5, 0) != 0)) begin
        w = link_q[0];
        dec_in_valid = 1; dec_in_data = w.data; dec_in_last = w.last;
        dec_in_bits = w.bits; dec_in_table = w.tab;
        #1;
        while (!dec_in_ready) begin
          @(negedge clk);
          #1;
        end
        @(posedge clk);
        void'(link_q.pop_front());
        @(negedge clk);   // settle before deciding again
        dec_in_valid = 0;
        if (link_q.size() > 0) begin
          // keep streaming back to back
          while (link_q.size() > 0 && (!stalls_on || $urandom_range(5, 0) != 0)) begin
            w = link_q[0];
            dec_in_valid = 1; dec_in_data = w.data; dec_in_last = w.last;
            dec_in_bits = w.bits; dec_in_table = w.tab;
            #1;
            while (!dec_in_ready) begin
              @(negedge clk);
              #1;
            end
            @(posedge clk);
            void'(link_q.pop_front());
            @(negedge clk);
            dec_in_valid = 0;
          end
        end
      end else dec_in_valid = 0;
    end
  end

  // ------------------------------------------------------------- loading
  task automatic load(int t, int s);
    int o[256];
    random_order(o);
    if (scheme_of_tab[t] >= 0 && scheme_of_tab[t] != s) n_reload_switch++;
    scheme_of_tab[t] = s;
    foreach (o[k]) rank_of[t][o[k]] = k;
    @(negedge clk);
    load_start = 1; load_table = 3'(t); load_scheme = scheme_id_t'(s);
    @(negedge clk);
    load_start = 0;
    for (int k = 0; k < 256; k++) begin
      if ($urandom_range(7, 0) == 0) begin
        load_valid = 0;
        @(negedge clk);
      end
      load_valid = 1; load_sym = sym_t'(o[k]);
      #1;
      while (!load_ready) begin
        @(negedge clk);
        #1;
      end
      @(posedge clk);
      @(negedge clk);
      load_valid = 0;
    end
    load_valid = 0;
    while (load_busy) @(negedge clk);
    n_load++;
  endtask

  // ------------------------------------------------------------- traffic
  // skewed rank: most mass on the first few dozen ranks
  function automatic int pick_rank();
    int u = $urandom_range(999, 0);
    if (u < 450) return $urandom_range(39, 0);
    if (u < 650) return $urandom_range(55, 40);
    if (u < 850) return $urandom_range(97, 56);
    return $urandom_range(255, 98);
  endfunction

  task automatic send_syms(int t, int syms[$]);
    int total = 0;
    int s = scheme_of_tab[t];
    if (s == 0) n_blk_s0++;
    else n_blk_s1++;
    if (syms.size() == 1) n_one_sym++;
    foreach (syms[k]) begin
      int rc, rl;
      ref_code(s, rank_of[t][syms[k]], rc, rl);
      total += rl;
      len_seen[s][rl]++;
      exp_sym.push_back(syms[k]);
      exp_last.push_back(k == syms.size() - 1);
    end
    exp_blk_bits.push_back(total);
    blk_tab_q.push_back(t);
    sym_total += syms.size();
    foreach (syms[k]) begin
      @(negedge clk);
      enc_in_valid = 1; enc_in_sym = sym_t'(syms[k]); enc_in_table = 3'(t);
      enc_in_last = (k == syms.size() - 1);
      #1;
      while (!enc_in_ready) begin
        @(negedge clk);
        #1;
      end
      @(posedge clk);
    end
    @(negedge clk) enc_in_valid = 0; enc_in_last = 0;
  endtask

  task automatic send_random(int t, int n);
    int syms[$];
    for (int k = 0; k < n; k++) syms.push_back(sym_t'(0));
    foreach (syms[k]) begin
      int r = pick_rank();
      // find the symbol with rank r
      for (int v = 0; v < 256; v++) if (rank_of[t][v] == r) syms[k] = v;
    end
    send_syms(t, syms);
  endtask

  task automatic drain();
    int guard = 0;
    while ((exp_sym.size() > 0 || link_q.size() > 0) && guard < 20000) begin
      @(negedge clk);
      guard++;
    end
    repeat (10) @(negedge clk);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int syms[$];
    foreach (scheme_of_tab[t]) scheme_of_tab[t] = -1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < NT; t++) load(t, t % 2);
    check(n_load == NT, "all tables loaded");

    // 1000 symbols end to end, no stalls: one symbol per cycle
    stalls_on = 0;
    send_random(0, 1000);
    drain();
    check(nout == 1000, $sformatf("%0d of 1000 decoded", nout));
    check(last_out - first_out + 1 <= 1000 + 4,
          $sformatf("1000 symbols left the decoder over %0d cycles", last_out - first_out + 1));
    stalls_on = 1;

    // exactly full last word: four 8-bit codes (scheme 0, ranks 56..87)
    syms = {};
    for (int k = 0; k < 4; k++)
      for (int v = 0; v < 256; v++) if (rank_of[2][v] == 60 + k) syms.push_back(v);
    send_syms(2, syms);
    // one-symbol block
    syms = {};
    syms.push_back(7);
    send_syms(1, syms);

    // random blocks over all tables
    for (int b = 0; b < 120; b++) send_random($urandom_range(NT - 1, 0), $urandom_range(80, 1));
    drain();

    // reload table 3 with the other scheme and use it
    load(3, 0);
    for (int b = 0; b < 20; b++) send_random(3, $urandom_range(80, 1));
    drain();

    check(exp_sym.size() == 0 && link_q.size() == 0, $sformatf("%0d symbols lost", exp_sym.size()));
    check(n_invalid == 0, "no invalid codes");

    $display("mechanisms: loads=%0d reload_switch=%0d blocks_s0=%0d blocks_s1=%0d enc_stall=%0d dec_in_stall=%0d dec_out_stall=%0d full_last=%0d part_last=%0d one_sym=%0d",
             n_load, n_reload_switch, n_blk_s0, n_blk_s1, n_enc_stall, n_dec_in_stall, n_dec_out_stall,
             n_full_last, n_part_last, n_one_sym);
    check(n_reload_switch > 0, "scheme switch by reload happened");
    check(n_blk_s0 > 0 && n_blk_s1 > 0, "both schemes used");
    check(n_enc_stall > 0, "encoder input stall happened");
    check(n_dec_in_stall > 0, "decoder input stall happened");
    check(n_dec_out_stall > 0, "decoder output stall happened");
    check(n_full_last > 0, "exactly full last word happened");
    check(n_part_last > 0, "partly full last word happened");
    check(n_one_sym > 0, "one-symbol block happened");
    check(len_seen[0][6] > 0 && len_seen[0][7] > 0 && len_seen[0][8] > 0 && len_seen[0][11] > 0,
          "all four code lengths of scheme 0 used");
    check(len_seen[1][4] > 0 && len_seen[1][6] > 0 && len_seen[1][8] > 0 && len_seen[1][11] > 0,
          "all four code lengths of scheme 1 used");
    $display("codec: %0d symbols, %0d compressed bits, compressibility %0.1f%% on this synthetic data",
             sym_total, bit_total, 100.0 * (1.0 - real'(bit_total) / (8.0 * real'(sym_total))));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
