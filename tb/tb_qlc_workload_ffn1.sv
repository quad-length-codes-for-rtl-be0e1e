// tb_qlc_workload_ffn1 -- FFN1-activation-like traffic through the codec.
//
// The symbol order of the table starts and ends with the byte values the
// paper prints for FFN1 activations: 113, 241, 234 have ranks 0-2, 233
// rank 8, and 137, 0, 128 ranks 253-255; the other values fill the
// remaining ranks in random order. Scheme 0 is used. First a block of
// 113, 233, 128 must be coded as 000_000, 001_000, 111_11111111 (23 bits).
// Then 64 blocks of 1024 symbols are drawn from a model distribution built
// from the Huffman code lengths the paper states for this tensor: the 37
// most probable values have probability 2^-6 each, the next 35 have 2^-7,
// and the remaining mass (19/128) is spread evenly over the other 184
// values. Under that model the expected code length is computed here and
// the measured compressed size must come within 0.1 bit per symbol of it;
// every symbol must come back unchanged. The real tensor data is not
// available, so the compressibility printed describes the model, not the
// paper's measurement.
module tb_qlc_workload_ffn1;
  import qlc_pkg::*;
  import tb_qlc_ref_pkg::*;

  logic         clk = 0, rst_n = 0;
  logic         load_start = 0, load_valid = 0, load_ready, load_busy, load_done;
  logic [2:0]   load_table = '0;
  scheme_id_t   load_scheme = '0;
  sym_t         load_sym = '0;
  logic         enc_in_valid = 0, enc_in_ready, enc_in_last = 0;
  sym_t         enc_in_sym = '0;
  logic [2:0]   enc_in_table = '0;
  logic         enc_out_valid, enc_out_ready, enc_out_last;
  logic [31:0]  enc_out_data;
  logic [5:0]   enc_out_bits;
  logic         dec_in_valid, dec_in_ready, dec_in_last;
  logic [31:0]  dec_in_data;
  logic [5:0]   dec_in_bits;
  logic [2:0]   dec_in_table;
  logic         dec_out_valid, dec_out_ready = 1, dec_out_last, dec_out_invalid;
  sym_t         dec_out_sym;

  qlc_codec dut (.*);

  // encoder output straight into the decoder
  assign dec_in_valid  = enc_out_valid;
  assign enc_out_ready = dec_in_ready;
  assign dec_in_data   = enc_out_data;
  assign dec_in_last   = enc_out_last;
  assign dec_in_bits   = enc_out_bits;
  assign dec_in_table  = 3'd0;

  int      order[256];
  int      exp_sym[$];
  int      checks = 0, failures = 0;
  longint  nsym = 0, nbits = 0;
  logic [31:0] first_word;
  bit      got_first = 0;

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  always @(posedge clk) begin
    if (rst_n && enc_out_valid && enc_out_ready) begin
      nbits += enc_out_last ? longint'(enc_out_bits) : 64'd32;
      if (!got_first) begin
        first_word = enc_out_data;
        got_first = 1;
        check(enc_out_last && enc_out_bits == 6'd23, $sformatf("first block: %0d bits", enc_out_bits));
      end
    end
    if (rst_n && dec_out_valid && dec_out_ready) begin
      check(exp_sym.size() > 0 && int'(dec_out_sym) == exp_sym[0] && !dec_out_invalid,
            $sformatf("decoded %0d want %0d", dec_out_sym, exp_sym.size() > 0 ? exp_sym[0] : -1));
      if (exp_sym.size() > 0) void'(exp_sym.pop_front());
    end
  end

  function automatic int model_rank();
    int x = $urandom_range(128 * 184 - 1, 0);
    if (x < 74 * 184)  return x / (2 * 184);
    if (x < 109 * 184) return 37 + (x - 74 * 184) / 184;
    return 72 + (x - 109 * 184) / 19;
  endfunction

  task automatic send_block(int syms[$]);
    foreach (syms[k]) begin
      exp_sym.push_back(syms[k]);
      @(negedge clk);
      enc_in_valid = 1; enc_in_sym = sym_t'(syms[k]); enc_in_last = (k == syms.size() - 1);
      #1;
      while (!enc_in_ready) begin
        @(negedge clk);
        #1;
      end
      @(posedge clk);
    end
    @(negedge clk) enc_in_valid = 0; enc_in_last = 0;
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rest[$];
    int blk[$];
    bit used[256];
    real exp_len, got_len;
    int rc, rl;
    // symbol order with the printed values in place
    foreach (order[i]) order[i] = -1;
    order[0] = 113; order[1] = 241; order[2] = 234; order[8] = 233;
    order[253] = 137; order[254] = 0; order[255] = 128;
    foreach (used[i]) used[i] = 0;
    foreach (order[i]) if (order[i] >= 0) used[order[i]] = 1;
    for (int v = 0; v < 256; v++) if (!used[v]) rest.push_back(v);
    rest.shuffle();
    foreach (order[i]) if (order[i] < 0) order[i] = rest.pop_front();

    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    load_start = 1; load_table = 3'd0; load_scheme = '0;
    @(negedge clk);
    load_start = 0;
    for (int k = 0; k < 256; k++) begin
      load_valid = 1; load_sym = sym_t'(order[k]);
      @(negedge clk);
    end
    load_valid = 0;
    @(negedge clk);
    check(!load_busy, "table loaded");

    // codes printed in the paper's encoder table
    blk = {113, 233, 128};
    send_block(blk);
    repeat (10) @(negedge clk);
    check(first_word[31:9] == 23'b000000_001000_11111111111, $sformatf("codes %b", first_word[31:9]));
    nbits = 0;

    // model expectation of the code length under scheme 0
    exp_len = 0.0;
    for (int r = 0; r < 256; r++) begin
      automatic real p = (r < 37) ? 1.0 / 64 : (r < 72) ? 1.0 / 128 : (19.0 / 128) / 184;
      ref_code(0, r, rc, rl);
      exp_len += p * rl;
    end

    for (int b = 0; b < 64; b++) begin
      blk = {};
      for (int k = 0; k < 1024; k++) blk.push_back(order[model_rank()]);
      nsym += 1024;
      send_block(blk);
    end
    while (exp_sym.size() > 0) @(negedge clk);
    repeat (10) @(negedge clk);
    got_len = real'(nbits) / real'(nsym);
    check(got_len > exp_len - 0.1 && got_len < exp_len + 0.1,
          $sformatf("mean code length %0.3f, model %0.3f", got_len, exp_len));
    $display("FFN1 model: %0d symbols, mean code %0.3f bits (model %0.3f), compressibility %0.1f%%",
             nsym, got_len, exp_len, 100.0 * (1.0 - got_len / 8.0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
