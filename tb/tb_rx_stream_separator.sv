// tb_rx_stream_separator: decoded frames with the three channel addresses
// in mixed order and one with an unknown address. Checks that each frame's
// body goes to the CRC checker of its channel only (crc_start with the
// address, 1248 crc bits, crc_last on the final one), that the first 1224
// body bits come out as payload tagged with the channel, and that the
// unknown frame is dropped with addr_miss.
module tb_rx_stream_separator;
  import tb_ref_pkg::*;
  logic clk = 0, rst = 1;
  logic d_valid = 0, d_data = 0, d_last = 0;
  logic [2:0] crc_start, crc_valid; logic [31:0] crc_addr; logic crc_bit, crc_last;
  logic pl_valid, pl_bit, pl_last, addr_miss; logic [1:0] pl_ch;
  int checks = 0, failures = 0, nmiss = 0;
  always #5 clk = ~clk;
  rx_stream_separator dut (.*);
  task automatic chk(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask
  bit crcb[3][$]; bit plb[$]; int plch[$]; int starts[3] = '{0, 0, 0}; int lasts = 0, pllast = 0;
  logic [31:0] saddr[3];
  always @(posedge clk) if (!rst) begin
    if (addr_miss) nmiss++;
    for (int c = 0; c < 3; c++) begin
      if (crc_start[c]) begin starts[c]++; saddr[c] = crc_addr; end
      if (crc_valid[c]) crcb[c].push_back(crc_bit);
    end
    if (crc_last) lasts++;
    if (pl_valid) begin plb.push_back(pl_bit); plch.push_back(int'(pl_ch)); end
    if (pl_last) pllast++;
    chk($countones(crc_valid) <= 1, "one CRC checker at a time");
  end
  initial begin
    int seq[5] = '{2, 0, 3, 1, 0};   // 3 = unknown address
    bitq_t fr [5];
    repeat (3) @(posedge clk); rst = 0;
    foreach (seq[k]) begin
      logic [31:0] a;
      byte unsigned pl[$];
      a = (seq[k] == 3) ? 32'h12345678 : ADDR_REF[seq[k]];
      pl.delete();
      for (int i = 0; i < 153; i++) pl.push_back(8'($urandom));
      fr[k] = info_bits(a, pl);
      for (int i = 0; i < 1280; i++) begin
        while ($urandom_range(4) == 0) begin @(negedge clk); d_valid = 0; end
        @(negedge clk); d_valid = 1; d_data = fr[k][i]; d_last = (i == 1279);
      end
      @(negedge clk); d_valid = 0; d_last = 0;
      repeat (3) @(negedge clk);
      if (seq[k] != 3) begin
        automatic int c = seq[k];
        automatic int bad = 0;
        chk(saddr[c] == a, "crc_addr");
        chk(crcb[c].size() == 1248, $sformatf("frame %0d: %0d crc bits", k, crcb[c].size()));
        for (int i = 0; i < 1248 && i < crcb[c].size(); i++) if (crcb[c][i] != fr[k][32+i]) bad++;
        chk(plb.size() == 1224, $sformatf("payload %0d bits", plb.size()));
        for (int i = 0; i < 1224 && i < plb.size(); i++) if (plb[i] != fr[k][32+i] || plch[i] != c) bad++;
        chk(bad == 0, $sformatf("frame %0d: %0d wrong", k, bad));
      end else begin
        chk(nmiss == 1 && plb.size() == 0, "unknown address dropped");
        for (int c = 0; c < 3; c++) chk(crcb[c].size() == 0, "no CRC bits for unknown frame");
      end
      for (int c = 0; c < 3; c++) crcb[c].delete();
      plb.delete(); plch.delete();
    end
    chk(starts[0] == 2 && starts[1] == 1 && starts[2] == 1, "crc_start per channel");
    chk(lasts == 4 && pllast == 4, "last flags");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
