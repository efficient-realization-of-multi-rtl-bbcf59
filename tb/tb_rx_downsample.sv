// tb_rx_downsample: random 12-bit samples; checks that y_valid comes every
// 5 clocks and that y is the sum of the 5 samples of its group.
module tb_rx_downsample;
  logic clk = 0, rst = 1;
  logic [11:0] adc = 0; logic [14:0] y; logic y_valid;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  rx_downsample dut (.*);
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  int sum = 0, n = 0, last = -1, cyc = 0;
  int exp_q[$];
  always @(posedge clk) if (!rst) begin
    cyc++;
    if (y_valid) begin
      chk(exp_q.size() > 0 && int'(y) == exp_q.pop_front(), "sum");
      if (last >= 0) chk(cyc - last == 5, "strobe period");
      last = cyc;
    end
    sum += adc; n++;
    if (n == 5) begin exp_q.push_back(sum); sum = 0; n = 0; end
  end
  always @(negedge clk) adc = 12'($urandom);
  initial begin
    repeat (3) @(posedge clk); @(negedge clk); rst = 0;
    repeat (5000) @(posedge clk);
    chk(checks > 1900, "enough outputs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
