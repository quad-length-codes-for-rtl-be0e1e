// tb_qlc_decoder_lut -- write/read test of the decoder look-up table.
//
// Fills every entry of every table with random data kept in a testbench
// copy, then reads all entries back in random order, checking the data one
// cycle after each read and that the output holds while no read is made.
module tb_qlc_decoder_lut;
  import qlc_pkg::*;

  localparam int NT = 8;

  logic       clk = 0;
  logic       we = 0, re = 0;
  logic [2:0] wtable = '0, rtable = '0;
  sym_t       waddr = '0, raddr = '0;
  sym_t wdata = '0, rdata;
  sym_t model [NT*256];
  int         checks = 0, failures = 0;

  qlc_decoder_lut dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sym_t held;
    for (int i = 0; i < NT*256; i++) model[i] = sym_t'($urandom);
    // fill, tables in descending order to catch table/address aliasing
    for (int t = NT-1; t >= 0; t--) begin
      for (int a = 0; a < 256; a++) begin
        @(negedge clk);
        we = 1; wtable = 3'(t); waddr = sym_t'(a); wdata = model[t*256 + a];
      end
    end
    @(negedge clk) we = 0;
    for (int n = 0; n < 3000; n++) begin
      automatic int t = $urandom_range(NT-1, 0);
      automatic int a = $urandom_range(255, 0);
      @(negedge clk);
      re = 1; rtable = 3'(t); raddr = sym_t'(a);
      @(negedge clk);
      re = 0;
      check(rdata == model[t*256 + a], $sformatf("table %0d addr %0d: got %h want %h",
                                                  t, a, rdata, model[t*256 + a]));
      held = rdata;
      rtable = 3'($urandom); raddr = sym_t'($urandom);
      @(negedge clk);
      check(rdata == held, "output holds without a read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
