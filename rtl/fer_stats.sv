// fer_stats: frame counters from which the frame error rate is read.
//
// Per channel: rx_frames counts synchronized frames (the number of frames
// received), ok_frames counts frames whose CRC check passed, crc_err frames
// whose check failed, and dropped frames lost because the channel's LLR
// buffer was still waiting for the decoder. addr_misses counts decoded
// frames whose address matched no channel. FER = 1 - ok_frames / frames
// sent. All counters are CNT_W bits, wrap around, and clear synchronously
// with `clear`. The received and CRC-correct counts follow the paper; the
// other counters and the widths are this design's additions.
module fer_stats #(
  parameter int N_CH  = owc_pkg::N_CH,
  parameter int CNT_W = 32
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             clear,
  input  logic [N_CH-1:0]  sync_det,
  input  logic [N_CH-1:0]  crc_done,
  input  logic [N_CH-1:0]  crc_ok,
  input  logic [N_CH-1:0]  overflow,
  input  logic             addr_miss,
  output logic [CNT_W-1:0] rx_frames [N_CH],
  output logic [CNT_W-1:0] ok_frames [N_CH],
  output logic [CNT_W-1:0] crc_err   [N_CH],
  output logic [CNT_W-1:0] dropped   [N_CH],
  output logic [CNT_W-1:0] addr_misses
);
  always_ff @(posedge clk) begin
    if (rst || clear) begin
      for (int c = 0; c < N_CH; c++) begin
        rx_frames[c] <= '0; ok_frames[c] <= '0; crc_err[c] <= '0; dropped[c] <= '0;
      end
      addr_misses <= '0;
    end else begin
      for (int c = 0; c < N_CH; c++) begin
        if (sync_det[c])                rx_frames[c] <= rx_frames[c] + 1'b1;
        if (crc_done[c] && crc_ok[c])   ok_frames[c] <= ok_frames[c] + 1'b1;
        if (crc_done[c] && !crc_ok[c])  crc_err[c]   <= crc_err[c] + 1'b1;
        if (overflow[c])                dropped[c]   <= dropped[c] + 1'b1;
      end
      if (addr_miss) addr_misses <= addr_misses + 1'b1;
    end
  end
endmodule
