// owc_system_top: the complete multi-channel water-to-air OOK link.
//
// Joins the transmitter (tx_fpga, on tx_clk, 125 MHz) and the receiver
// (rx_fpga, on rx_clk, 100 MHz). The two halves share no signal: in the
// real system they are two boards linked only by light through the water
// surface. Everything outside the logic is brought out as ports: the three
// UART lines from the host, the DAC codes that drive the LEDs, the ADC
// samples of the APDs, the bit-serial ports of the three LDPC encoder cores
// and the LLR/bit ports of the one shared LDPC decoder core, the separated
// payload and the frame counters.
module owc_system_top #(
  parameter int N_CH = owc_pkg::N_CH,
  localparam int GW  = (N_CH > 1) ? $clog2(N_CH) : 1
) (
  input  logic                      tx_clk,
  input  logic                      tx_rst,
  input  logic                      rx_clk,
  input  logic                      rx_rst,
  // host serial links (Tx side)
  input  logic [N_CH-1:0]           uart_rxd,
  output logic [N_CH-1:0]           uart_rts_n,
  // LDPC encoder cores
  output logic [N_CH-1:0]           enc_i_valid,
  output logic [N_CH-1:0]           enc_i_data,
  output logic [N_CH-1:0]           enc_i_last,
  input  logic [N_CH-1:0]           enc_i_ready,
  input  logic [N_CH-1:0]           enc_o_valid,
  input  logic [N_CH-1:0]           enc_o_data,
  input  logic [N_CH-1:0]           enc_o_last,
  output logic [N_CH-1:0]           enc_o_ready,
  // DAC (LED drive) and ADC (APD samples)
  output logic [owc_pkg::DAC_W-1:0] dac_code [N_CH],
  input  logic [owc_pkg::ADC_W-1:0] adc [N_CH],
  // Rx configuration
  input  logic [23:0]               sync_thresh,
  input  logic                      stats_clear,
  // shared LDPC decoder core
  output logic                      dec_s_valid,
  output logic [owc_pkg::LLR_W-1:0] dec_s_data,
  output logic                      dec_s_last,
  input  logic                      dec_s_ready,
  input  logic                      dec_m_valid,
  input  logic                      dec_m_data,
  input  logic                      dec_m_last,
  // received data and statistics
  output logic                      pl_valid,
  output logic                      pl_bit,
  output logic [GW-1:0]             pl_ch,
  output logic                      pl_last,
  output logic [N_CH-1:0]           crc_done,
  output logic [N_CH-1:0]           crc_ok,
  output logic [31:0]               frames_sent [N_CH],
  output logic [31:0]               guard_slots [N_CH],
  output logic [31:0]               rx_frames [N_CH],
  output logic [31:0]               ok_frames [N_CH],
  output logic [31:0]               crc_err   [N_CH],
  output logic [31:0]               dropped   [N_CH],
  output logic [31:0]               addr_misses,
  output logic [31:0]               sched_waits
);
  tx_fpga #(.N_CH(N_CH)) u_tx (
    .clk(tx_clk), .rst(tx_rst), .uart_rxd, .uart_rts_n,
    .enc_i_valid, .enc_i_data, .enc_i_last, .enc_i_ready,
    .enc_o_valid, .enc_o_data, .enc_o_last, .enc_o_ready,
    .dac_code, .frames_sent, .guard_slots);

  rx_fpga #(.N_CH(N_CH)) u_rx (
    .clk(rx_clk), .rst(rx_rst), .adc, .sync_thresh, .stats_clear,
    .dec_s_valid, .dec_s_data, .dec_s_last, .dec_s_ready,
    .dec_m_valid, .dec_m_data, .dec_m_last,
    .pl_valid, .pl_bit, .pl_ch, .pl_last, .crc_done, .crc_ok,
    .rx_frames, .ok_frames, .crc_err, .dropped, .addr_misses, .sched_waits);
endmodule
