// tb_rx_demod: a delayed sample stream with one sample every 3 clocks;
// after det with a random skip, checks that 2176 soft bits come out, each
// the sum of the right 4 samples, with sb_first/sb_last on the end bits,
// for three frames.
module tb_rx_demod;
  logic clk = 0, rst = 1;
  logic [14:0] x_del = 0; logic x_del_valid = 0, det = 0; logic [3:0] skip = 0;
  logic sb_valid, sb_first, sb_last, busy; logic [16:0] sb_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  rx_demod dut (.*);
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  int xs[$]; int nout = 0, base = 0;
  always @(posedge clk) if (!rst && sb_valid) begin
    automatic int e = xs[base + 4*nout] + xs[base + 4*nout + 1] + xs[base + 4*nout + 2] + xs[base + 4*nout + 3];
    chk(int'(sb_data) == e, $sformatf("bit %0d: %0d vs %0d", nout, sb_data, e));
    chk(sb_first == (nout == 0) && sb_last == (nout == 2175), "first/last");
    nout++;
  end
  task automatic sample();
    automatic int v = $urandom_range(32767);
    @(negedge clk); x_del = 15'(v); x_del_valid = 1; xs.push_back(v);
    @(negedge clk); x_del_valid = 0; @(negedge clk);
  endtask
  initial begin
    repeat (3) @(posedge clk); rst = 0;
    for (int f = 0; f < 3; f++) begin
      automatic int sk = $urandom_range(1, 9);
      repeat (5) sample();
      @(negedge clk); det = 1; skip = 4'(sk); @(negedge clk); det = 0;
      base = xs.size() + sk;
      nout = 0;
      repeat (sk + 4 * 2176 + 10) sample();
      chk(nout == 2176, $sformatf("frame %0d: %0d bits", f, nout));
      chk(!busy, "idle after frame");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (120000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
