// tb_owc_system_top: the whole link, at the design's default sizes, from
// host bytes to separated, CRC-checked payloads. Three host models send
// four 153-byte payloads each over the UARTs; encoder models, a channel
// model (per-channel gain, slow wave-like gain swing, noise) and a single
// decoder model close the loop. Stream 0's encoder is stalled at first so
// its FIFO fills and RTS pauses its host. One bit of channel 1's second
// frame (a payload bit) and one of channel 2's third frame (an address bit)
// are inverted in the channel. Checks every delivered payload against what
// the host sent, the frame counters on both sides, the 80 us spacing of the
// channels' frame detections, and counts each mechanism: RTS pause, guard
// slot, staggered frames, frames through the shared decoder, address
// separation, CRC error, address miss; one that never happened is a
// failure.
module tb_owc_system_top;
  import tb_ref_pkg::*;
  localparam int N = 3, NF = 4;
  logic tx_clk = 0, rx_clk = 0, tx_rst = 1, rx_rst = 1;
  logic [N-1:0] uart_rxd, uart_rts_n;
  logic [N-1:0] enc_i_valid, enc_i_data, enc_i_last, enc_i_ready;
  logic [N-1:0] enc_o_valid, enc_o_data, enc_o_last, enc_o_ready;
  logic [13:0]  dac_code [N];
  logic [11:0]  adc [N];
  logic dec_s_valid, dec_s_last, dec_s_ready, dec_m_valid, dec_m_data, dec_m_last;
  logic [7:0] dec_s_data;
  logic pl_valid, pl_bit, pl_last; logic [1:0] pl_ch;
  logic [N-1:0] crc_done, crc_ok;
  logic [31:0] frames_sent [N], guard_slots [N], rx_frames [N], ok_frames [N], crc_err [N], dropped [N];
  logic [31:0] addr_misses, sched_waits;
  logic [N-1:0] stall = '0;
  int checks = 0, failures = 0, dec_frames;
  always #4 tx_clk = ~tx_clk;
  always #5 rx_clk = ~rx_clk;

  owc_system_top dut (.tx_clk, .tx_rst, .rx_clk, .rx_rst, .uart_rxd, .uart_rts_n,
    .enc_i_valid, .enc_i_data, .enc_i_last, .enc_i_ready,
    .enc_o_valid, .enc_o_data, .enc_o_last, .enc_o_ready,
    .dac_code, .adc, .sync_thresh(24'd2000000), .stats_clear(1'b0),
    .dec_s_valid, .dec_s_data, .dec_s_last, .dec_s_ready,
    .dec_m_valid, .dec_m_data, .dec_m_last,
    .pl_valid, .pl_bit, .pl_ch, .pl_last, .crc_done, .crc_ok,
    .frames_sent, .guard_slots, .rx_frames, .ok_frames, .crc_err, .dropped,
    .addr_misses, .sched_waits);

  for (genvar c = 0; c < N; c++) begin : g
    uart_host_model host (.clk(tx_clk), .rts_n(uart_rts_n[c]), .txd(uart_rxd[c]));
    ldpc_enc_model  enc (.clk(tx_clk), .rst(tx_rst), .stall(stall[c]), .i_valid(enc_i_valid[c]),
      .i_data(enc_i_data[c]), .i_last(enc_i_last[c]), .i_ready(enc_i_ready[c]),
      .o_valid(enc_o_valid[c]), .o_data(enc_o_data[c]), .o_last(enc_o_last[c]),
      .o_ready(enc_o_ready[c]));
  end
  owc_channel_model chan (.tx_clk, .rx_clk, .dac(dac_code), .adc);
  ldpc_dec_model dec (.clk(rx_clk), .rst(rx_rst), .s_valid(dec_s_valid), .s_data(dec_s_data),
    .s_last(dec_s_last), .s_ready(dec_s_ready), .m_valid(dec_m_valid), .m_data(dec_m_data),
    .m_last(dec_m_last), .frames(dec_frames));

  task automatic chk(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Sent payload bits per channel and frame.
  bit sent [N][NF][$];
  bit cur [N][$]; int got [N] = '{0, 0, 0};
  int n_sep = 0, n_crc_bad = 0;
  always @(posedge rx_clk) if (!rx_rst) begin
    if (pl_valid) cur[pl_ch].push_back(pl_bit);
    if (pl_last) begin
      automatic int c = int'(pl_ch);
      automatic int bad = 0;
      // channel 2's third frame never arrives (address hit), so skip it
      automatic int f = (c == 2 && got[c] >= 2) ? got[c] + 1 : got[c];
      if (f < NF) for (int i = 0; i < 1224; i++) if (cur[c][i] != sent[c][f][i]) bad++;
      if (c == 1 && f == 1) chk(bad == 1, $sformatf("ch1 frame1 should have 1 error, %0d", bad));
      else chk(bad == 0 && f < NF, $sformatf("ch %0d frame %0d: %0d wrong bits", c, f, bad));
      n_sep++;
      got[c]++; cur[c].delete();
    end
    for (int c = 0; c < N; c++) if (crc_done[c] && !crc_ok[c]) n_crc_bad++;
  end

  // Frame detection times at the receiver (rx clock cycles).
  longint rcyc = 0; longint det_t [N][$];
  always @(posedge rx_clk) begin
    rcyc++;
    for (int c = 0; c < N; c++) if (dut.u_rx.det[c]) det_t[c].push_back(rcyc);
  end

  initial begin
    int n_stagger = 0;
    chan.flip_ch.push_back(1); chan.flip_frame.push_back(1); chan.flip_bit.push_back(256 + 32 + 500);
    chan.flip_ch.push_back(2); chan.flip_frame.push_back(2); chan.flip_bit.push_back(256 + 5);
    repeat (5) @(posedge rx_clk); tx_rst = 0; rx_rst = 0;
    stall[0] = 1;
    for (int c = 0; c < N; c++)
      for (int f = 0; f < NF; f++)
        for (int i = 0; i < 153; i++) begin
          automatic byte unsigned b = 8'($urandom);
          for (int k = 7; k >= 0; k--) sent[c][f].push_back(b[k]);
          case (c)
            0: g[0].host.push(b);
            1: g[1].host.push(b);
            default: g[2].host.push(b);
          endcase
        end
    // let stream 0's FIFO fill past the RTS mark, then release its encoder
    wait (!tx_rst && uart_rts_n[0]);
    repeat (3000) @(posedge tx_clk);
    stall[0] = 0;
    wait (frames_sent[0] == NF && frames_sent[1] == NF && frames_sent[2] == NF);
    repeat (60000) @(posedge rx_clk);
    for (int c = 0; c < N; c++) begin
      chk(rx_frames[c] == NF, $sformatf("rx_frames[%0d]=%0d", c, rx_frames[c]));
      chk(dropped[c] == 0, "no dropped frames");
    end
    chk(ok_frames[0] == 4 && ok_frames[1] == 3 && ok_frames[2] == 3,
        $sformatf("ok_frames %0d %0d %0d", ok_frames[0], ok_frames[1], ok_frames[2]));
    chk(crc_err[1] == 1 && crc_err[0] == 0 && crc_err[2] == 0, "crc_err");
    chk(got[0] == 4 && got[1] == 4 && got[2] == 3, $sformatf("payloads %0d %0d %0d", got[0], got[1], got[2]));
    // when two streams send in the same slot, stream b's frame is detected
    // (b-a)*80 us (8000 rx clocks) after stream a's
    for (int a = 0; a < N; a++)
      for (int b = a + 1; b < N; b++)
        foreach (det_t[b][k])
          foreach (det_t[a][j]) begin
            automatic longint d = det_t[b][k] - det_t[a][j];
            if (d > 0 && d < 40000) begin
              chk(d >= (b - a) * 8000 - 5 && d <= (b - a) * 8000 + 5, $sformatf("streams %0d-%0d offset %0d", a, b, d));
              n_stagger++;
            end
          end
    $display("mechanisms: rts_pauses=%0d guard_slots=%0d staggered=%0d decoded=%0d separated=%0d crc_errors=%0d addr_misses=%0d sched_waits=%0d",
      g[0].host.paused, guard_slots[0] + guard_slots[1] + guard_slots[2], n_stagger, dec_frames,
      n_sep, n_crc_bad, addr_misses, sched_waits);
    chk(g[0].host.paused > 0, "RTS flow control never paused the host");
    chk(guard_slots[0] + guard_slots[1] + guard_slots[2] > 0, "no guard slot");
    chk(n_stagger >= NF, "staggered frame starts");
    chk(dec_frames == 3 * NF, "frames through the shared decoder");
    chk(n_sep == 11, "separated frames");
    chk(n_crc_bad == 1, "CRC error detected");
    chk(addr_misses == 1, "address miss");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1500000) @(posedge rx_clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
