// tx_fpga: transmitter of the three-channel link.
//
// Per stream: uart_rx -> byte FIFO -> tx_packetizer (address + payload +
// CRC-24, 1280 bits) -> external LDPC encoder (2176 bits) -> tx_framer (sync
// sequence prefix) -> bit-wide frame FIFO -> ook_modulator -> DAC code. One
// tx_slot_timer starts the three streams' frames 80 us apart. The LDPC
// encoders are IP cores outside this RTL: each stream has a bit-serial
// valid/ready port pair to one (enc_i_* carries the 1280 information bits
// out, enc_o_* brings the 2176 coded bits back). uart_rts_n goes high (stop
// sending) when the byte FIFO has fewer than RTS_MARGIN free places; the
// margin is this design's choice. frames_sent counts transmitted frames.
module tx_fpga #(
  parameter int N_CH       = owc_pkg::N_CH,
  parameter int IN_DEPTH   = 512,
  parameter int FF_DEPTH   = 4096,
  parameter int RTS_MARGIN = 64,
  parameter int SLOT_BITS  = owc_pkg::SLOT_BITS
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [N_CH-1:0]          uart_rxd,
  output logic [N_CH-1:0]          uart_rts_n,
  // to the LDPC encoders
  output logic [N_CH-1:0]          enc_i_valid,
  output logic [N_CH-1:0]          enc_i_data,
  output logic [N_CH-1:0]          enc_i_last,
  input  logic [N_CH-1:0]          enc_i_ready,
  // from the LDPC encoders
  input  logic [N_CH-1:0]          enc_o_valid,
  input  logic [N_CH-1:0]          enc_o_data,
  input  logic [N_CH-1:0]          enc_o_last,
  output logic [N_CH-1:0]          enc_o_ready,
  output logic [owc_pkg::DAC_W-1:0] dac_code [N_CH],
  output logic [31:0]              frames_sent [N_CH],
  output logic [31:0]              guard_slots [N_CH]
);
  import owc_pkg::*;
  localparam int CW = $clog2(IN_DEPTH) + 1;
  localparam int FW = $clog2(FF_DEPTH) + 1;

  logic            bit_tick;
  logic [N_CH-1:0] slot_start;

  tx_slot_timer #(.N_CH(N_CH), .SLOT_BITS(SLOT_BITS)) u_timer (
    .clk, .rst, .bit_tick, .slot_start);

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    logic [7:0]    rx_byte, in_head;
    logic          rx_valid, rx_ferr, in_rd, in_full, in_empty;
    logic [CW-1:0] in_count;
    logic          ff_wr, ff_wdata, ff_rd, ff_head, ff_full, ff_empty;
    logic [FW-1:0] ff_count;
    logic          frame_done, frame_sent, guard_slot;

    uart_rx u_uart (.clk, .rst, .rxd(uart_rxd[c]), .data(rx_byte), .valid(rx_valid),
                    .frame_err(rx_ferr));

    fifo_sync #(.WIDTH(8), .DEPTH(IN_DEPTH)) u_in_fifo (
      .clk, .rst, .wr_en(rx_valid && !in_full), .wr_data(rx_byte), .rd_en(in_rd),
      .rd_data(in_head), .count(in_count), .full(in_full), .empty(in_empty));

    always_ff @(posedge clk)
      if (rst) uart_rts_n[c] <= 1'b0;
      else     uart_rts_n[c] <= (int'(in_count) > IN_DEPTH - RTS_MARGIN);

    tx_packetizer #(.CH_ADDR(ch_addr(c)), .CNT_W(CW)) u_pkt (
      .clk, .rst, .fifo_count(in_count), .fifo_data(in_head), .fifo_rd(in_rd),
      .enc_valid(enc_i_valid[c]), .enc_data(enc_i_data[c]), .enc_last(enc_i_last[c]),
      .enc_ready(enc_i_ready[c]));

    tx_framer #(.FIFO_DEPTH(FF_DEPTH)) u_framer (
      .clk, .rst, .cw_valid(enc_o_valid[c]), .cw_data(enc_o_data[c]),
      .cw_last(enc_o_last[c]), .cw_ready(enc_o_ready[c]),
      .ff_wr, .ff_data(ff_wdata), .ff_count, .frame_done);

    fifo_sync #(.WIDTH(1), .DEPTH(FF_DEPTH)) u_frame_fifo (
      .clk, .rst, .wr_en(ff_wr), .wr_data(ff_wdata), .rd_en(ff_rd), .rd_data(ff_head),
      .count(ff_count), .full(ff_full), .empty(ff_empty));

    ook_modulator u_mod (
      .clk, .rst, .bit_tick, .slot_start(slot_start[c]), .frame_done,
      .ff_rd, .ff_data(ff_head), .dac_code(dac_code[c]), .frame_sent, .guard_slot);

    always_ff @(posedge clk)
      if (rst) begin
        frames_sent[c] <= '0; guard_slots[c] <= '0;
      end else begin
        if (frame_sent) frames_sent[c] <= frames_sent[c] + 1'b1;
        if (guard_slot) guard_slots[c] <= guard_slots[c] + 1'b1;
      end
  end
endmodule
