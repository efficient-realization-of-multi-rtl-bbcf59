// tb_rx_chan_est: random preamble sums (S1 >= S0 and S1 < S0); checks the
// midpoint, amplitude and shift against the formulas, computed with
// integer division and a search for the leading one.
module tb_rx_chan_est;
  logic clk = 0, rst = 1, load = 0;
  logic [23:0] s1 = 0, s0 = 0;
  logic [16:0] mid, amp; logic [4:0] shift; logic est_valid;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  rx_chan_est dut (.*);
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (3) @(posedge clk); rst = 0;
    for (int t = 0; t < 400; t++) begin
      longint a, b, em, ea; int es, lz;
      a = $urandom_range(24'hFFFFFF); b = $urandom_range(24'hFFFFFF);
      if (t % 4 == 0) b = a + $urandom_range(1000);        // no signal
      if (b > 24'hFFFFFF) b = 24'hFFFFFF;
      @(negedge clk); s1 = 24'(a); s0 = 24'(b); load = 1;
      @(negedge clk); load = 0;
      em = (a + b) / 256;
      ea = (a > b) ? (a - b) / 128 : 0;
      lz = -1; for (int i = 0; i < 40; i++) if (ea >= (longint'(1) << i)) lz = i;
      es = (lz > 6) ? lz - 6 : 0;
      chk(est_valid, "est_valid");
      chk(longint'(mid) == em && longint'(amp) == ea && int'(shift) == es,
          $sformatf("s1=%0d s0=%0d: mid %0d/%0d amp %0d/%0d sh %0d/%0d", a, b, mid, em, amp, ea, shift, es));
      @(negedge clk);
      chk(!est_valid && longint'(mid) == em, "held");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
