// tx_slot_timer: air-interface timing shared by the three transmit streams.
//
// Produces bit_tick, one clock in CLKS_PER_BIT (5 Mbps from 125 MHz), and
// counts bit times in a frame slot of SLOT_BITS. Stream k gets slot_start[k]
// on the bit tick at which the slot counter equals k*STAGGER_BITS, so stream
// 2 starts its frames 80 us (400 bits) after stream 1 and stream 3 another
// 80 us later, as in the published timing diagram; the rest of each slot is
// guard interval. This staggering lets the receiver feed the three frames to
// a single LDPC decoder one after another. The 80 us offset follows the
// paper; the slot length of 800 us is this design's choice.
module tx_slot_timer #(
  parameter int N_CH         = owc_pkg::N_CH,
  parameter int CLKS_PER_BIT = owc_pkg::TX_CLKS_PER_BIT,
  parameter int SLOT_BITS    = owc_pkg::SLOT_BITS,
  parameter int STAGGER_BITS = owc_pkg::STAGGER_BITS
) (
  input  logic            clk,
  input  logic            rst,
  output logic            bit_tick,
  output logic [N_CH-1:0] slot_start
);
  logic [$clog2(CLKS_PER_BIT)-1:0] ccnt;
  logic [$clog2(SLOT_BITS)-1:0]    bcnt;

  initial assert ((N_CH - 1) * STAGGER_BITS < SLOT_BITS);

  assign bit_tick = (int'(ccnt) == CLKS_PER_BIT - 1);
  always_comb
    for (int k = 0; k < N_CH; k++)
      slot_start[k] = bit_tick && (int'(bcnt) == k * STAGGER_BITS);

  always_ff @(posedge clk) begin
    if (rst) begin
      ccnt <= '0; bcnt <= '0;
    end else if (bit_tick) begin
      ccnt <= '0;
      bcnt <= (int'(bcnt) == SLOT_BITS - 1) ? '0 : bcnt + 1'b1;
    end else begin
      ccnt <= ccnt + 1'b1;
    end
  end
endmodule
