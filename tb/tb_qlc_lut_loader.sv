// tb_qlc_lut_loader -- loads tables from random symbol orders.
//
// Captures the loader's LUT and scheme writes into testbench arrays and
// checks: encoder entry of each input symbol = reference code of its rank;
// decoder entry of each rank = the symbol; the scheme write; done one
// cycle after the 256th symbol; 256 writes per load at one per cycle.
// Gaps in sym_valid are inserted on the second load.
module tb_qlc_lut_loader;
  import qlc_pkg::*;
  import tb_qlc_ref_pkg::*;

  localparam int NT = 8;

  logic       clk = 0, rst_n = 0;
  logic       start = 0, sym_valid = 0, sym_ready, busy, done;
  logic [2:0] start_table = '0;
  scheme_id_t start_scheme = '0;
  sym_t       sym = '0;
  logic       sch_we, enc_we, dec_we;
  logic [2:0] sch_table, enc_table, dec_table;
  scheme_id_t sch_id;
  sym_t       enc_addr, dec_addr, dec_data;
  enc_entry_t enc_data;

  enc_entry_t enc_m [NT*256];
  sym_t       dec_m [NT*256];
  int         sch_m [NT];
  int         nwrites, done_cycle, cycle = 0;
  int         checks = 0, failures = 0;

  qlc_lut_loader dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycle++;
    if (enc_we) begin
      enc_m[enc_table*256 + enc_addr] <= enc_data;
      nwrites++;
    end
    if (dec_we) dec_m[dec_table*256 + dec_addr] <= dec_data;
    if (sch_we) sch_m[sch_table] <= int'(sch_id);
    if (done) done_cycle = cycle;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic load(int t, int s, int order[256], bit gaps);
    int start_cycle;
    nwrites = 0;
    done_cycle = 0;
    @(negedge clk);
    start = 1; start_table = 3'(t); start_scheme = scheme_id_t'(s);
    @(negedge clk);
    start = 0;
    check(busy && sym_ready, "busy after start");
    start_cycle = cycle;
    for (int k = 0; k < 256; k++) begin
      if (gaps && ($urandom_range(3, 0) == 0)) begin
        sym_valid = 0;
        @(negedge clk);
      end
      sym_valid = 1; sym = sym_t'(order[k]);
      @(negedge clk);
    end
    sym_valid = 0;
    @(negedge clk);
    check(!busy, "idle after 256 symbols");
    check(nwrites == 256, $sformatf("writes %0d", nwrites));
    if (!gaps) check(done_cycle == start_cycle + 257, $sformatf("done at +%0d", done_cycle - start_cycle));
    else       check(done_cycle != 0, "done pulsed");
  endtask

  task automatic verify(int t, int s, int order[256]);
    int rc, rl;
    check(sch_m[t] == s, $sformatf("table %0d scheme %0d", t, sch_m[t]));
    for (int k = 0; k < 256; k++) begin
      ref_code(s, k, rc, rl);
      check(int'(enc_m[t*256 + order[k]].code) == rc && int'(enc_m[t*256 + order[k]].len) == rl,
            $sformatf("table %0d enc[%0d]", t, order[k]));
      check(int'(dec_m[t*256 + k]) == order[k], $sformatf("table %0d dec[%0d]", t, k));
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int o1[256], o2[256];
    foreach (sch_m[i]) sch_m[i] = -1;
    random_order(o1);
    random_order(o2);
    repeat (3) @(negedge clk);
    rst_n = 1;
    load(5, 0, o1, 0);
    load(2, 1, o2, 1);
    verify(5, 0, o1);
    verify(2, 1, o2);
    check(sch_m[0] == -1, "other tables untouched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
