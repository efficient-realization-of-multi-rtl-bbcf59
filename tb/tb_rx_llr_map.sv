// tb_rx_llr_map: random soft bits, midpoints and shifts; checks the
// registered LLR against floor((mid - y) / 2^shift) saturated to +-127, and
// the flags' one-clock delay.
module tb_rx_llr_map;
  logic clk = 0, rst = 1;
  logic sb_valid = 0, sb_first = 0, sb_last = 0; logic [16:0] sb_data = 0, mid = 0; logic [4:0] shift = 0;
  logic llr_valid, llr_first, llr_last; logic signed [7:0] llr;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  rx_llr_map dut (.*);
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (3) @(posedge clk); rst = 0;
    for (int t = 0; t < 2000; t++) begin
      int y, m, s, d, e; bit f, l;
      m = $urandom_range(131071); s = $urandom_range(10);
      y = (t % 2) ? $urandom_range(131071) : m + $urandom_range(400) - 200;
      if (y < 0) y = 0; if (y > 131071) y = 131071;
      f = 1'($urandom); l = 1'($urandom);
      @(negedge clk); sb_valid = 1; sb_data = 17'(y); mid = 17'(m); shift = 5'(s); sb_first = f; sb_last = l;
      @(negedge clk); sb_valid = 0;
      d = m - y;
      e = (d >= 0) ? d / (1 << s) : -((-d + (1 << s) - 1) / (1 << s));
      if (e > 127) e = 127; if (e < -127) e = -127;
      chk(llr_valid && int'(llr) == e && llr_first == f && llr_last == l,
          $sformatf("y=%0d mid=%0d sh=%0d: %0d vs %0d", y, m, s, llr, e));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
