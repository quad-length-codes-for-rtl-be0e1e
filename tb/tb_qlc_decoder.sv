// tb_qlc_decoder -- packed quad length codes in, symbols out.
//
// The decoder LUTs and scheme registers of two tables (one per scheme) are
// written from random symbol orders. The testbench encodes blocks of random
// symbols itself (reference codes, concatenated MSB first, cut into 32-bit
// words, the last one zero padded) and checks the decoded symbols, the
// last-symbol flag and that no code is flagged invalid. Phase 1 streams
// 400 symbols with no backpressure and must decode one per cycle; later
// blocks see random backpressure. A hand-made block holding a last-area
// code that no encoder emits must raise out_invalid.
module tb_qlc_decoder;
  import qlc_pkg::*;
  import tb_qlc_ref_pkg::*;

  localparam int W = 32;
  localparam int NT = 8;

  logic         clk = 0, rst_n = 0;
  logic         lut_we = 0, sch_we = 0;
  logic [2:0]   lut_wtable = '0, sch_table = '0;
  sym_t         lut_waddr = '0, lut_wdata = '0;
  scheme_id_t   sch_id = '0;
  logic         in_valid = 0, in_ready, in_last = 0;
  logic [W-1:0] in_data = '0;
  logic [5:0]   in_bits = '0;
  logic [2:0]   in_table = '0;
  logic         out_valid, out_ready = 0, out_last, out_invalid;
  sym_t         out_sym;

  int           rank_of [NT][256];
  int           scheme_of_tab [NT];
  int           exp_sym[$];
  bit           exp_last[$];
  int           checks = 0, failures = 0, nout = 0, ninvalid = 0, first_out = -1, last_out = 0, cycle = 0;
  bit           random_ready = 0;

  qlc_decoder dut (.*);

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
    cycle++;
    if (rst_n && out_valid && out_ready) begin
      if (out_invalid) ninvalid++;
      else begin
        check(exp_sym.size() > 0, "unexpected symbol");
        if (exp_sym.size() > 0) begin
          check(int'(out_sym) == exp_sym[0] && out_last == exp_last[0],
                $sformatf("symbol %0d: got %0d/%b want %0d/%b", nout, out_sym, out_last, exp_sym[0], exp_last[0]));
          void'(exp_sym.pop_front());
          void'(exp_last.pop_front());
        end
      end
      if (first_out < 0) first_out = cycle;
      last_out = cycle;
      nout++;
    end
  end

  task automatic load_table(int t, int s);
    int o[256];
    random_order(o);
    scheme_of_tab[t] = s;
    @(negedge clk);
    sch_we = 1; sch_table = 3'(t); sch_id = scheme_id_t'(s);
    for (int k = 0; k < 256; k++) begin
      rank_of[t][o[k]] = k;
      @(negedge clk);
      sch_we = 0;
      lut_we = 1; lut_wtable = 3'(t); lut_waddr = sym_t'(k); lut_wdata = sym_t'(o[k]);
    end
    @(negedge clk) lut_we = 0;
  endtask

  task automatic send_bits(int t, bit bits[$]);
    while (bits.size() > 0) begin
      automatic int n = bits.size() > W ? W : bits.size();
      automatic logic [W-1:0] w = '0;
      for (int i = 0; i < n; i++) w[W-1-i] = bits.pop_front();
      @(negedge clk);
      in_valid = 1; in_data = w; in_last = (bits.size() == 0); in_bits = 6'(n); in_table = 3'(t);
      #1;
      while (!in_ready) begin
        @(negedge clk);
        #1;
      end
      @(posedge clk);
    end
    @(negedge clk) in_valid = 0; in_last = 0;
  endtask

  task automatic send_block(int t, int nsym);
    bit bits[$];
    for (int k = 0; k < nsym; k++) begin
      int s = $urandom_range(255, 0);
      int rc, rl;
      ref_code(scheme_of_tab[t], rank_of[t][s], rc, rl);
      for (int i = rl - 1; i >= 0; i--) bits.push_back(rc[i]);
      exp_sym.push_back(s);
      exp_last.push_back(k == nsym - 1);
    end
    send_bits(t, bits);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit bad[$];
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_table(2, 0);
    load_table(7, 1);
    // phase 1: rate
    send_block(2, 400);
    repeat (20) @(negedge clk);
    check(nout == 400, $sformatf("%0d of 400 decoded", nout));
    check(last_out - first_out + 1 == 400,
          $sformatf("400 symbols came out over %0d cycles", last_out - first_out + 1));
    // phase 2: both tables, backpressure
    random_ready = 1;
    for (int b = 0; b < 200; b++) send_block(($urandom_range(1, 0) == 0) ? 2 : 7, $urandom_range(60, 1));
    repeat (300) @(negedge clk);
    check(exp_sym.size() == 0, $sformatf("%0d symbols never decoded", exp_sym.size()));
    // a code the encoder never emits: area 111 with value 5 < 88 (scheme 0)
    for (int i = 10; i >= 0; i--) bad.push_back(i < 8 ? (5 >> i) & 1 : 1);
    send_bits(2, bad);
    repeat (20) @(negedge clk);
    check(ninvalid == 1, $sformatf("%0d invalid codes flagged", ninvalid));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
