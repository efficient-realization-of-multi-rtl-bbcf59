// owc_pkg: constants and helper functions shared by the transmitter and the
// receiver of the three-channel water-to-air OOK link.
//
// Frame format (one per channel and frame slot):
//   256-bit sync sequence | 2176-bit LDPC codeword
// The 1280 LDPC information bits are 32 address bits, 1224 payload bits and a
// 24-bit CRC. The lengths 256, 32, 24, 1280 and 2176 follow the published
// system; the CRC polynomial, the sync sequence and the address values are
// this design's own choices (CRC24A of 5G NR, an 8-stage m-sequence padded
// with one zero, and 32'hA5C3_000n for channel n).
package owc_pkg;

  localparam int N_CH          = 3;     // LEDs / APDs / data streams
  localparam int ADDR_BITS     = 32;
  localparam int CRC_BITS      = 24;
  localparam int K_BITS        = 1280;  // LDPC information length
  localparam int N_CODE        = 2176;  // LDPC codeword length (rate 0.588)
  localparam int SYNC_BITS     = 256;
  localparam int FRAME_BITS    = SYNC_BITS + N_CODE;                // 2432
  localparam int PAYLOAD_BITS  = K_BITS - ADDR_BITS - CRC_BITS;     // 1224
  localparam int PAYLOAD_BYTES = PAYLOAD_BITS / 8;                  // 153

  localparam int DAC_W   = 14;
  localparam int ADC_W   = 12;
  localparam int LLR_W   = 8;

  // Clocking: Tx at 125 MHz (64 clocks per 1953125-baud UART bit, 25 clocks
  // per 5 Mbps air bit), Rx at the 100 MSPS ADC rate (20 samples per bit).
  localparam int TX_CLKS_PER_BAUD = 64;
  localparam int TX_CLKS_PER_BIT  = 25;
  localparam int STAGGER_BITS     = 400;   // 80 us at 5 Mbps
  localparam int SLOT_BITS        = 4000;  // frame slot of 800 us
  localparam int RX_DS            = 5;     // 100 MS/s -> 20 MS/s
  localparam int RX_SPB           = 4;     // samples per bit after decimation

  localparam logic [23:0] CRC24_POLY = 24'h864CFB;

  typedef logic [ADDR_BITS-1:0] addr_t;
  typedef logic signed [LLR_W-1:0] llr_t;

  // Sending address of channel ch (0-based).
  function automatic addr_t ch_addr(input int ch);
    return 32'hA5C3_0000 | addr_t'(ch + 1);
  endfunction

  // One bit of a CRC-24 shift register, MSB first, no reflection.
  function automatic logic [23:0] crc24_next(input logic [23:0] c, input logic b);
    logic fb;
    fb = c[23] ^ b;
    return {c[22:0], 1'b0} ^ (fb ? CRC24_POLY : 24'h0);
  endfunction

  // CRC-24 state after shifting in a 32-bit word, MSB first, from state c.
  function automatic logic [23:0] crc24_word(input logic [23:0] c, input addr_t w);
    logic [23:0] s;
    s = c;
    for (int i = ADDR_BITS - 1; i >= 0; i--) s = crc24_next(s, w[i]);
    return s;
  endfunction

  // Sync sequence, bit i is sent i-th. Chips 0..254 are the m-sequence of the
  // Fibonacci LFSR x^8+x^6+x^5+x^4+1 (seed 8'h01, output = stage 0); chip 255
  // is 0, so the sequence holds 128 ones and 128 zeros.
  function automatic logic [SYNC_BITS-1:0] sync_seq();
    logic [SYNC_BITS-1:0] s;
    logic [7:0] r;
    r = 8'h01;
    s = '0;
    for (int i = 0; i < SYNC_BITS - 1; i++) begin
      s[i] = r[0];
      r = {r[0] ^ r[2] ^ r[3] ^ r[4], r[7:1]};
    end
    return s;
  endfunction

  localparam logic [SYNC_BITS-1:0] SYNC_SEQ = sync_seq();

endpackage
