// crc24_checker: CRC-24 verification of one channel's decoded frame.
//
// The transmitter computes CRC24A (polynomial 0x864CFB, initial value 0,
// most significant bit first) over the 32-bit address and the 1224 payload
// bits and appends the 24 check bits. The separator has already read the
// address when it knows the channel, so `start` loads the CRC register with
// the CRC of `addr` in one clock (a 32-step unrolled update); each following
// bit_valid shifts in one bit, and with bit_last (the final check bit) the
// block pulses `done` with ok = 1 when the remainder is zero. A CRC check
// after separation follows the paper; the polynomial is this design's
// choice.
module crc24_checker (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 start,
  input  owc_pkg::addr_t       addr,
  input  logic                 bit_valid,
  input  logic                 bit_data,
  input  logic                 bit_last,
  output logic                 done,
  output logic                 ok
);
  import owc_pkg::*;
  logic [23:0] crc, nxt;

  assign nxt = crc24_next(crc, bit_data);

  always_ff @(posedge clk) begin
    if (rst) begin
      crc <= '0; done <= 1'b0; ok <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        crc <= crc24_word(24'h0, addr);
      end else if (bit_valid) begin
        crc <= nxt;
        if (bit_last) begin
          done <= 1'b1;
          ok   <= (nxt == 24'h0);
        end
      end
    end
  end
endmodule
