// tb_tx_slot_timer: checks the bit tick period (25 clocks = 200 ns at
// 125 MHz, i.e. 5 Mbps), that stream k's slot starts fall k*400 bits
// (k*80 us) after stream 0's, and the slot period of 4000 bits, over three
// slots.
module tb_tx_slot_timer;
  logic clk = 0, rst = 1;
  logic bit_tick; logic [2:0] slot_start;
  int checks = 0, failures = 0;
  longint cyc = 0, last_tick = -1;
  longint starts [3][$];
  always #4 clk = ~clk;

  tx_slot_timer dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (!rst) begin
    cyc++;
    if (bit_tick) begin
      if (last_tick >= 0) chk(cyc - last_tick == 25, "bit period");
      last_tick = cyc;
    end
    for (int k = 0; k < 3; k++) if (slot_start[k]) begin
      chk(bit_tick, "slot start on a bit tick");
      starts[k].push_back(cyc);
    end
  end

  initial begin
    repeat (3) @(posedge clk); rst = 0;
    repeat (3 * 4000 * 25 + 10) @(posedge clk);
    for (int k = 0; k < 3; k++) chk(starts[k].size() == 3, $sformatf("stream %0d slots", k));
    for (int s = 0; s < 3; s++) begin
      for (int k = 1; k < 3; k++)
        chk(starts[k][s] - starts[0][s] == longint'(k * 400 * 25), "80 us stagger");
      if (s > 0) chk(starts[0][s] - starts[0][s-1] == 4000 * 25, "slot period");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
