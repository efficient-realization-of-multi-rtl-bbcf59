// tb_ook_modulator: bit ticks every 25 clocks and slot starts every 3000
// bits from the testbench; frames are queued in a FIFO model with
// frame_done. Checks that a queued frame is sent whole at its slot start,
// bit by bit as full-scale / zero DAC codes, that frame_sent comes with the
// last bit, and that a slot with nothing queued stays at zero and is
// flagged as a guard slot.
module tb_ook_modulator;
  localparam int CPB = 25, SLOT = 3000, FB = 2432;
  logic clk = 0, rst = 1;
  logic bit_tick = 0, slot_start = 0, frame_done = 0, ff_rd, ff_data;
  logic [13:0] dac_code;
  logic frame_sent, guard_slot;
  int checks = 0, failures = 0, nsent = 0, nguard = 0;
  bit fq[$], sent_q[$];
  int pending = 0;
  int npop = 0;
  // Pop between clock edges so the model's head never races the DUT's sampling.
  always @(negedge clk) while (npop > 0) begin void'(fq.pop_front()); npop--; end
  always #4 clk = ~clk;

  ook_modulator dut (.*);
  assign ff_data = (fq.size() > 0) ? fq[0] : 1'b0;

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Timing generator and DAC observer.
  int ccnt = 0, bcnt = 0;
  bit in_frame = 0; int fbit = 0;
  always @(posedge clk) if (!rst) begin
    if (ff_rd) npop++;
    if (frame_sent) nsent++;
    if (guard_slot) nguard++;
    // sample DAC in the middle of each bit (12 clocks after the tick)
    if (ccnt == 12) begin
      if (in_frame) begin
        chk(dac_code == (sent_q[fbit] ? 14'h3FFF : 14'h0000), $sformatf("bit %0d sent %0d t=%0t fq=%0d", fbit, nsent, $time, fq.size()));
        fbit++;
        if (fbit == FB) in_frame = 0;
      end else chk(dac_code == 14'h0, "guard level");
    end
    if (slot_start && pending > 0 && !in_frame) begin in_frame = 1; fbit = 0; pending--; end
    if (ccnt == CPB - 1) begin ccnt = 0; bcnt = (bcnt == SLOT - 1) ? 0 : bcnt + 1; end
    else ccnt++;
  end
  always @(negedge clk) begin
    bit_tick   = (ccnt == CPB - 1) && !rst;
    slot_start = bit_tick && (bcnt == 0);
  end

  task automatic queue_frame();
    bit b;
    sent_q.delete();
    for (int i = 0; i < FB; i++) begin b = 1'($urandom); fq.push_back(b); sent_q.push_back(b); end
    @(negedge clk); frame_done = 1; pending++; @(negedge clk); frame_done = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk); rst = 0;
    // slot 0: nothing queued -> guard
    repeat (10) @(posedge clk);
    wait (slot_start); repeat (5) @(posedge clk);
    chk(nguard == 1, "first slot is guard");
    queue_frame();
    wait (nsent == 1);
    repeat (CPB) @(posedge clk);
    chk(fq.size() == 0, "whole frame read");
    queue_frame();
    wait (nsent == 2);
    repeat (SLOT * CPB) @(posedge clk);
    chk(nguard >= 2, "empty slot after the frames");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (8 * SLOT * CPB) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
