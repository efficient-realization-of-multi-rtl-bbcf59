// rx_fpga: receiver of the three-channel link.
//
// Per APD channel, at the 100 MSPS sample clock: rx_downsample (to 4
// samples per bit) -> rx_sync (sync-sequence correlation) -> rx_chan_est
// (levels from the preamble) and rx_demod (bit integration) -> rx_llr_map
// (8-bit LLRs) -> llr_frame_buffer. One ldpc_dec_scheduler feeds the three
// buffers in turn to a single external LDPC decoder (dec_s_*: one LLR per
// valid/ready beat, dec_s_last on LLR 2175). The decoder returns the 1280
// information bits of each frame on dec_m_* (one bit per dec_m_valid,
// dec_m_last on the last) in the order it received the frames.
// rx_stream_separator reads each frame's address and routes it to one of
// three crc24_checker instances and to the payload output; fer_stats keeps
// the counters. sync_thresh sets the correlation threshold (in units of the
// S1-S0 sum; see rx_sync). sched_waits counts frames that had to wait for
// the decoder while another channel's frame was being decoded.
module rx_fpga #(
  parameter int N_CH = owc_pkg::N_CH,
  localparam int GW  = (N_CH > 1) ? $clog2(N_CH) : 1,
  localparam int XW  = owc_pkg::ADC_W + $clog2(owc_pkg::RX_DS),
  localparam int BW  = XW + $clog2(owc_pkg::RX_SPB),
  localparam int SW  = BW + 7
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic [owc_pkg::ADC_W-1:0] adc [N_CH],
  input  logic [SW-1:0]             sync_thresh,
  input  logic                      stats_clear,
  // to the LDPC decoder
  output logic                      dec_s_valid,
  output logic [owc_pkg::LLR_W-1:0] dec_s_data,
  output logic                      dec_s_last,
  input  logic                      dec_s_ready,
  // from the LDPC decoder
  input  logic                      dec_m_valid,
  input  logic                      dec_m_data,
  input  logic                      dec_m_last,
  // separated payload
  output logic                      pl_valid,
  output logic                      pl_bit,
  output logic [GW-1:0]             pl_ch,
  output logic                      pl_last,
  output logic [N_CH-1:0]           crc_done,
  output logic [N_CH-1:0]           crc_ok,
  // statistics
  output logic [31:0]               rx_frames [N_CH],
  output logic [31:0]               ok_frames [N_CH],
  output logic [31:0]               crc_err   [N_CH],
  output logic [31:0]               dropped   [N_CH],
  output logic [31:0]               addr_misses,
  output logic [31:0]               sched_waits
);
  import owc_pkg::*;
  localparam int AW = $clog2(N_CODE);

  logic [N_CH-1:0] det, full, release_buf, overflow;
  logic [AW-1:0]   rd_addr;
  logic [LLR_W-1:0] rd_data [N_CH];

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    logic [XW-1:0] y, x_del;
    logic          y_valid, x_del_valid;
    logic [$clog2(2*RX_SPB+1)-1:0] skip;
    logic [SW-1:0] s1, s0;
    logic [BW-1:0] mid, amp, sb_data;
    logic [4:0]    shift;
    logic          est_valid, sb_valid, sb_first, sb_last, demod_busy;
    logic          llr_valid, llr_first, llr_last;
    logic signed [LLR_W-1:0] llr;

    rx_downsample u_ds (.clk, .rst, .adc(adc[c]), .y, .y_valid);

    rx_sync u_sync (.clk, .rst, .x(y), .x_valid(y_valid), .thresh(sync_thresh),
      .det(det[c]), .skip, .s1, .s0, .x_del, .x_del_valid);

    rx_chan_est u_est (.clk, .rst, .load(det[c]), .s1, .s0, .mid, .amp, .shift, .est_valid);

    rx_demod u_demod (.clk, .rst, .x_del, .x_del_valid, .det(det[c]), .skip,
      .sb_valid, .sb_data, .sb_first, .sb_last, .busy(demod_busy));

    rx_llr_map u_llr (.clk, .rst, .sb_valid, .sb_data, .sb_first, .sb_last, .mid, .shift,
      .llr_valid, .llr, .llr_first, .llr_last);

    llr_frame_buffer u_buf (.clk, .rst, .wr_valid(llr_valid), .wr_data(llr),
      .wr_first(llr_first), .wr_last(llr_last), .full(full[c]), .rd_addr,
      .rd_data(rd_data[c]), .release_buf(release_buf[c]), .overflow(overflow[c]));
  end

  logic [GW-1:0] grant;
  logic          sched_busy, waited;

  ldpc_dec_scheduler #(.N_CH(N_CH)) u_sched (.clk, .rst, .full, .rd_addr, .rd_data,
    .release_buf, .dec_valid(dec_s_valid), .dec_data(dec_s_data), .dec_last(dec_s_last),
    .dec_ready(dec_s_ready), .grant, .busy(sched_busy), .waited);

  logic [N_CH-1:0] crc_start, crc_valid;
  addr_t           crc_addr;
  logic            crc_bit, crc_last, addr_miss;

  rx_stream_separator #(.N_CH(N_CH)) u_sep (.clk, .rst, .d_valid(dec_m_valid),
    .d_data(dec_m_data), .d_last(dec_m_last), .crc_start, .crc_addr, .crc_valid,
    .crc_bit, .crc_last, .pl_valid, .pl_bit, .pl_ch, .pl_last, .addr_miss);

  for (genvar c = 0; c < N_CH; c++) begin : g_crc
    crc24_checker u_crc (.clk, .rst, .start(crc_start[c]), .addr(crc_addr),
      .bit_valid(crc_valid[c]), .bit_data(crc_bit), .bit_last(crc_last),
      .done(crc_done[c]), .ok(crc_ok[c]));
  end

  fer_stats #(.N_CH(N_CH)) u_stats (.clk, .rst, .clear(stats_clear), .sync_det(det),
    .crc_done, .crc_ok, .overflow, .addr_miss, .rx_frames, .ok_frames, .crc_err,
    .dropped, .addr_misses);

  always_ff @(posedge clk)
    if (rst || stats_clear) sched_waits <= '0;
    else if (waited)        sched_waits <= sched_waits + 1'b1;
endmodule
