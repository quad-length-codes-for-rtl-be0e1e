// tb_qlc_bit_packer -- random codes in, packed words out.
//
// Sends blocks of random codes (length 1..11) and keeps every code bit in a
// reference queue per block. Each output word must equal the next 32 bits
// of the queue; the last word of a block must carry the number of bits
// left, zero padding, and out_last. Phase 1 has out_ready always high and
// checks one code accepted per cycle; phase 2 drops out_ready at random.
module tb_qlc_bit_packer;
  import qlc_pkg::*;

  localparam int W = 32;

  logic         clk = 0, rst_n = 0;
  logic         in_valid = 0, in_ready, in_last = 0;
  code_t        in_code = '0;
  len_t         in_len = '0;
  logic         out_valid, out_ready = 0, out_last;
  logic [W-1:0] out_data;
  logic [5:0]   out_bits;
  bit           ref_q[$];
  int           blk_bits[$];   // code bits per block still expected
  bit           blk_done[$];   // block fully sent
  int           checks = 0, failures = 0;
  int           words = 0, lasts = 0, stall_cycles = 0;
  bit           random_ready = 0;

  qlc_bit_packer dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // sink: compare each word taken with the reference queue
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
    if (rst_n && in_valid && !in_ready) stall_cycles++;
  end

  task automatic send_block(int ncodes);
    int total = 0;
    for (int k = 0; k < ncodes; k++) begin
      int l = $urandom_range(11, 1);
      int c = $urandom_range((1 << l) - 1, 0);
      @(negedge clk);
      in_valid = 1; in_code = code_t'(c); in_len = len_t'(l); in_last = (k == ncodes - 1);
      for (int i = l - 1; i >= 0; i--) ref_q.push_back(c[i]);
      total += l;
      if (k == 0) begin
        blk_bits.push_back(0);
        blk_done.push_back(0);
      end
      blk_bits[blk_bits.size() - 1] += l;
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
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // phase 1: full rate
    t0 = $time;
    send_block(200);
    check(($time - t0) / 10 == 200 + 1, $sformatf("200 codes took %0d cycles", ($time - t0) / 10 - 1));
    check(stall_cycles == 0, "no stall at full rate");
    repeat (20) @(negedge clk);
    // phase 2: random backpressure, many block sizes
    random_ready = 1;
    for (int b = 0; b < 300; b++) send_block($urandom_range(40, 1));
    repeat (200) @(negedge clk);
    check(ref_q.size() == 0 && blk_bits.size() == 0, "all bits delivered");
    check(lasts == 301, $sformatf("%0d blocks ended", lasts));
    check(stall_cycles > 0, "backpressure reached the input");
    $display("packer: %0d words, %0d blocks, %0d stall cycles", words, lasts, stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
