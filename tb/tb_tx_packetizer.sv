// tb_tx_packetizer: feeds random payloads through a FIFO model and checks
// the 1280-bit output of three frames against a reference (address, payload
// MSB first, CRC-24 by long division), the position of enc_last, the number
// of bytes popped, and that nothing starts below 153 bytes. enc_ready is
// random.
module tb_tx_packetizer;
  import tb_ref_pkg::*;
  logic clk = 0, rst = 1;
  logic [9:0] fifo_count; logic [7:0] fifo_data; logic fifo_rd;
  logic enc_valid, enc_data, enc_last, enc_ready = 0;
  int checks = 0, failures = 0;
  byte unsigned fq[$];
  bit got[$];
  int frames = 0;
  int npop = 0;
  // Pop between clock edges so the model's head never races the DUT's sampling.
  always @(negedge clk) while (npop > 0) begin void'(fq.pop_front()); npop--; end
  always #5 clk = ~clk;

  tx_packetizer #(.CH_ADDR(32'hA5C30002)) dut (.*);

  assign fifo_count = 10'(fq.size());
  assign fifo_data  = (fq.size() > 0) ? fq[0] : 8'h00;

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (!rst) begin
    if (fifo_rd) npop++;
    if (enc_valid && enc_ready) begin
      got.push_back(enc_data);
      chk(enc_last == (got.size() == 1280), "enc_last position");
      if (enc_last) frames++;
    end
  end

  initial begin
    byte unsigned pl[$];
    bitq_t exp;
    repeat (3) @(posedge clk); rst = 0;
    // 152 bytes: must not start
    for (int i = 0; i < 152; i++) fq.push_back(8'($urandom));
    repeat (50) @(posedge clk);
    chk(!enc_valid, "no start below a full payload");
    for (int f = 0; f < 3; f++) begin
      if (f > 0) for (int i = 0; i < 152; i++) fq.push_back(8'($urandom));
      fq.push_back(8'($urandom));
      pl = fq[0:152];
      exp = info_bits(32'hA5C30002, pl);
      got.delete();
      fork
        forever begin @(negedge clk); enc_ready = $urandom_range(3) != 0; end
      join_none
      wait (frames == f + 1);
      disable fork;
      chk(got.size() == 1280, "length");
      for (int i = 0; i < 1280; i++) if (got[i] != exp[i]) begin
        chk(0, $sformatf("frame %0d bit %0d", f, i)); break;
      end
      checks++;
      chk(fq.size() == 0, "153 bytes consumed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (30000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
