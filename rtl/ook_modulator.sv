// ook_modulator: on-off keying of one stream's frames onto its DAC channel.
//
// A counter keeps the number of complete frames in the frame FIFO
// (frame_done adds one). At each of the stream's slot starts, if a frame is
// queued, the modulator sends all FRAME_BITS bits of it, one per bit_tick:
// a 1 drives DAC_HIGH, a 0 drives DAC_LOW. A slot with no frame queued stays
// at DAC_LOW for its whole length (guard_slot pulses). frame_sent pulses with
// the last bit. The DAC code changes one clock after the bit tick and holds
// for the bit time. OOK at the air rate follows the paper; the levels and the
// empty-slot behaviour are this design's choices.
module ook_modulator #(
  parameter int                  DAC_W    = owc_pkg::DAC_W,
  parameter logic [DAC_W-1:0]    DAC_HIGH = '1,
  parameter logic [DAC_W-1:0]    DAC_LOW  = '0
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             bit_tick,
  input  logic             slot_start,
  input  logic             frame_done,
  output logic             ff_rd,
  input  logic             ff_data,
  output logic [DAC_W-1:0] dac_code,
  output logic             frame_sent,
  output logic             guard_slot
);
  import owc_pkg::*;
  logic [2:0]  queued;
  logic        sending;
  logic [11:0] nbits;
  logic        start, bit_now;

  assign start   = slot_start && !sending && (queued != '0);
  assign bit_now = bit_tick && (start || sending);
  assign ff_rd   = bit_now;

  always_ff @(posedge clk) begin
    if (rst) begin
      queued <= '0; sending <= 1'b0; nbits <= '0;
      dac_code <= DAC_LOW; frame_sent <= 1'b0; guard_slot <= 1'b0;
    end else begin
      frame_sent <= 1'b0;
      guard_slot <= slot_start && !sending && (queued == '0);
      queued <= queued + (frame_done ? 3'd1 : 3'd0) - (start ? 3'd1 : 3'd0);
      if (bit_now) begin
        dac_code <= ff_data ? DAC_HIGH : DAC_LOW;
        if (start) begin
          sending <= 1'b1; nbits <= 12'd1;
        end else if (nbits == 12'(FRAME_BITS-1)) begin
          sending <= 1'b0; nbits <= '0; frame_sent <= 1'b1;
        end else begin
          nbits <= nbits + 1'b1;
        end
      end else if (bit_tick && !sending) begin
        dac_code <= DAC_LOW;
      end
    end
  end

  a_no_slot_overlap: assert property (@(posedge clk) disable iff (rst)
    !(slot_start && sending));
endmodule
