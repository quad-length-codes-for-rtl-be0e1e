// tb_qlc_bit_unpacker -- words in, bit window out.
//
// Blocks of random length (in bits) are cut into 32-bit words, the last
// one partly filled with junk after its code bits. A consumer takes a
// random number of bits (1..11, never more than held) whenever it can;
// the window's valid bits must always equal the next bits of the
// reference stream, and `final_blk` must be set while a block's tail is
// held. Phase 1 takes 11 bits every cycle and checks that the buffer never
// runs short while input words are available.
module tb_qlc_bit_unpacker;
  import qlc_pkg::*;

  localparam int W = 32;

  logic          clk = 0, rst_n = 0;
  logic          in_valid = 0, in_ready, in_last = 0;
  logic [W-1:0]  in_data = '0;
  logic [5:0]    in_bits = '0;
  logic [10:0]   window;
  logic [6:0]    avail;
  logic          final_blk;
  logic          consume = 0;
  len_t          consume_len = '0;
  bit            ref_q[$];
  int            checks = 0, failures = 0, short_cycles = 0, taken_bits = 0, sent_bits = 0;
  bit            full_rate = 1, feeding = 0;

  qlc_bit_unpacker dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // consumer: decide at the negedge, compare the window with the reference
  always @(negedge clk) begin
    consume <= 1'b0;
    if (rst_n && avail != 0) begin
      automatic int n = (avail < 11) ? int'(avail) : 11;
      automatic int l = full_rate ? n : $urandom_range(n, 1);
      automatic logic [10:0] exp = '0;
      automatic logic [10:0] mask = '0;
      for (int i = 0; i < n; i++) begin
        exp[10-i]  = ref_q[i];
        mask[10-i] = 1'b1;
      end
      check((window & mask) == exp, $sformatf("window %b want %b (avail %0d)", window, exp, avail));
      if (full_rate && feeding && avail < 11 && !final_blk) short_cycles++;
      if (full_rate || $urandom_range(3, 0) != 0) begin
        consume <= 1'b1;
        consume_len <= len_t'(l);
        for (int i = 0; i < l; i++) void'(ref_q.pop_front());
        taken_bits += l;
      end
    end
  end

  task automatic send_block(int nbits);
    int left = nbits;
    while (left > 0) begin
      automatic int n = left > W ? W : left;
      automatic logic [W-1:0] w = W'($urandom);
      for (int i = 0; i < n; i++) ref_q.push_back(w[W-1-i]);
      @(negedge clk);
      in_valid = 1; in_data = w; in_last = (left <= W); in_bits = 6'(n);
      #1;
      while (!in_ready) begin
        @(negedge clk);
        #1;
      end
      @(posedge clk);
      left -= n;
      sent_bits += n;
    end
    @(negedge clk) in_valid = 0; in_last = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    feeding = 1;
    send_block(32 * 200 + 7);
    feeding = 0;
    repeat (200) @(negedge clk);
    check(short_cycles <= 2, $sformatf("buffer ran short %0d times at full rate", short_cycles));
    full_rate = 0;
    for (int b = 0; b < 300; b++) send_block($urandom_range(100, 1));
    repeat (500) @(negedge clk);
    check(ref_q.size() == 0 && taken_bits == sent_bits, $sformatf("sent %0d took %0d", sent_bits, taken_bits));
    check(avail == 0 && !final_blk && in_ready, "empty at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
