// tb_fer_stats: random event pulses on every input for 5000 clocks against
// testbench counters, then a clear.
module tb_fer_stats;
  logic clk = 0, rst = 1, clear = 0;
  logic [2:0] sync_det = 0, crc_done = 0, crc_ok = 0, overflow = 0; logic addr_miss = 0;
  logic [31:0] rx_frames [3], ok_frames [3], crc_err [3], dropped [3], addr_misses;
  int checks = 0, failures = 0;
  int e_rx[3], e_ok[3], e_err[3], e_drop[3], e_miss;
  always #5 clk = ~clk;
  fer_stats dut (.*);
  task automatic chk(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (3) @(posedge clk); rst = 0;
    for (int c = 0; c < 3; c++) begin e_rx[c] = 0; e_ok[c] = 0; e_err[c] = 0; e_drop[c] = 0; end
    e_miss = 0;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      sync_det = 3'($urandom); crc_done = 3'($urandom); crc_ok = 3'($urandom);
      overflow = 3'($urandom_range(7) == 0 ? $urandom : 0); addr_miss = ($urandom_range(9) == 0);
      for (int c = 0; c < 3; c++) begin
        e_rx[c] += sync_det[c]; e_ok[c] += crc_done[c] & crc_ok[c];
        e_err[c] += crc_done[c] & !crc_ok[c]; e_drop[c] += overflow[c];
      end
      e_miss += addr_miss;
    end
    @(negedge clk); sync_det = 0; crc_done = 0; overflow = 0; addr_miss = 0;
    @(negedge clk);
    for (int c = 0; c < 3; c++)
      chk(int'(rx_frames[c]) == e_rx[c] && int'(ok_frames[c]) == e_ok[c] &&
          int'(crc_err[c]) == e_err[c] && int'(dropped[c]) == e_drop[c], $sformatf("channel %0d", c));
    chk(int'(addr_misses) == e_miss, "address misses");
    clear = 1; @(negedge clk); clear = 0;
    chk(rx_frames[0] == 0 && ok_frames[1] == 0 && crc_err[2] == 0 && addr_misses == 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
