// tb_rx_fpga: the receiver end to end with a decoder model. ADC waveforms
// for the three channels are built in the testbench at 20 samples per bit:
// off level 600, on level 1600..2600 (different per channel), uniform noise
// +-150. Phase 1 sends three frames per channel, staggered by 80 us in an
// 800 us slot as the transmitter does; one frame of channel 1 has a payload
// bit flipped and one of channel 2 an address bit flipped. Phase 2 sends
// one frame on all channels at the same time, so that two frames must wait
// for the shared decoder. Checks the payload bits and channel of every good
// frame, CRC results, and the frame counters.
module tb_rx_fpga;
  import tb_ref_pkg::*;
  localparam int N = 3, SPBIT = 20;
  logic clk = 0, rst = 1;
  logic [11:0] adc [N];
  logic dec_s_valid, dec_s_last, dec_s_ready, dec_m_valid, dec_m_data, dec_m_last;
  logic [7:0] dec_s_data;
  logic pl_valid, pl_bit, pl_last; logic [1:0] pl_ch;
  logic [2:0] crc_done, crc_ok;
  logic [31:0] rx_frames [N], ok_frames [N], crc_err [N], dropped [N], addr_misses, sched_waits;
  int checks = 0, failures = 0, dec_frames;
  always #5 clk = ~clk;

  rx_fpga dut (.clk, .rst, .adc, .sync_thresh(24'd2000000), .stats_clear(1'b0),
    .dec_s_valid, .dec_s_data, .dec_s_last, .dec_s_ready, .dec_m_valid, .dec_m_data, .dec_m_last,
    .pl_valid, .pl_bit, .pl_ch, .pl_last, .crc_done, .crc_ok,
    .rx_frames, .ok_frames, .crc_err, .dropped, .addr_misses, .sched_waits);
  ldpc_dec_model dec (.clk, .rst, .s_valid(dec_s_valid), .s_data(dec_s_data), .s_last(dec_s_last),
    .s_ready(dec_s_ready), .m_valid(dec_m_valid), .m_data(dec_m_data), .m_last(dec_m_last),
    .frames(dec_frames));

  task automatic chk(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Per-channel bit schedule: bit value at each bit time (absolute).
  bit line [N][$];
  int hi_lvl [N] = '{2600, 1600, 2100};
  longint cyc = 0;
  always @(negedge clk) begin
    for (int c = 0; c < N; c++) begin
      automatic longint b = cyc / SPBIT;
      automatic bit v = (b < line[c].size()) ? line[c][b] : 1'b0;
      adc[c] = 12'((v ? hi_lvl[c] : 600) + int'($urandom_range(300)) - 150);
    end
    cyc++;
  end

  // Expected payloads per channel, in order.
  bit exp_pl [N][$][$];
  task automatic place(input int c, input int start_bit, input int flip);
    byte unsigned pl[$]; bitq_t info, cw; bit p[$];
    for (int i = 0; i < 153; i++) pl.push_back(8'($urandom));
    info = info_bits(ADDR_REF[c], pl);
    cw = code_bits(info);
    if (flip >= 0) cw[flip] = !cw[flip];
    if (flip < 0 || flip >= 32) begin
      for (int i = 0; i < 1224; i++) p.push_back(cw[32+i]);
      exp_pl[c].push_back(p);
    end
    while (line[c].size() < start_bit + 2432) line[c].push_back(1'b0);
    for (int i = 0; i < 256; i++) line[c][start_bit+i] = SYNC_REF[i];
    for (int i = 0; i < 2176; i++) line[c][start_bit+256+i] = cw[i];
  endtask

  // Collect separated payloads.
  bit cur [N][$]; int got [N] = '{0, 0, 0}; int okc = 0, errc = 0;
  always @(posedge clk) if (!rst) begin
    if (pl_valid) cur[pl_ch].push_back(pl_bit);
    if (pl_last) begin
      automatic int c = int'(pl_ch);
      automatic int bad = 0;
      if (got[c] < exp_pl[c].size()) begin
        for (int i = 0; i < 1224; i++) if (cur[c][i] != exp_pl[c][got[c]][i]) bad++;
      end else bad = -1;
      chk(bad == 0, $sformatf("ch %0d payload %0d: %0d wrong", c, got[c], bad));
      got[c]++; cur[c].delete();
    end
    for (int c = 0; c < N; c++) if (crc_done[c]) begin if (crc_ok[c]) okc++; else errc++; end
  end

  initial begin
    for (int c = 0; c < N; c++) line[c].push_back(1'b0);
    for (int s = 0; s < 3; s++)
      for (int c = 0; c < N; c++) begin
        automatic int fl = -1;
        if (s == 1 && c == 1) fl = 500;    // payload bit
        if (s == 2 && c == 2) fl = 5;      // address bit
        place(c, 600 + s * 4000 + c * 400, fl);
      end
    for (int c = 0; c < N; c++) place(c, 600 + 3 * 4000, -1);   // aligned: all at once
    repeat (3) @(posedge clk); rst = 0;
    repeat ((600 + 4 * 4000) * SPBIT + 20000) @(posedge clk);
    for (int c = 0; c < N; c++) begin
      chk(rx_frames[c] == 4, $sformatf("rx_frames[%0d]=%0d", c, rx_frames[c]));
      chk(dropped[c] == 0, "no drops");
    end
    chk(ok_frames[0] == 4 && ok_frames[1] == 3 && ok_frames[2] == 3, "ok_frames");
    chk(crc_err[0] == 0 && crc_err[1] == 1 && crc_err[2] == 0, "crc_err");
    chk(addr_misses == 1, $sformatf("addr_misses=%0d", addr_misses));
    chk(sched_waits == 2, $sformatf("sched_waits=%0d", sched_waits));
    chk(dec_frames == 12, "12 frames through the one decoder");
    chk(got[0] == 4 && got[1] == 4 && got[2] == 3, $sformatf("payloads %0d %0d %0d", got[0], got[1], got[2]));
    chk(okc == 10 && errc == 1, "CRC results");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
