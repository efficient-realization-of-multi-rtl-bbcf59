// rx_chan_est: per-frame estimate of the received on/off levels.
//
// The water surface changes the optical gain from frame to frame, so the
// receiver re-estimates the channel from every frame's sync preamble. From
// the preamble sums at the correlation peak (S1 over the 128 one-chips, S0
// over the 128 zero-chips, each term a bit sum of SPB samples) it computes
//   mid   = (S1 + S0) / 256     decision midpoint per bit sum
//   amp   = (S1 - S0) / 128     on-minus-off level per bit sum
//   shift = max(0, msb(amp) - 6)
// so that (mid - y) >>> shift puts the +-amp/2 signal points near +-32..63
// in an 8-bit LLR. Outputs are registered on `load` (the synchronizer's det)
// and hold until the next frame; `est_valid` pulses when they change.
// Estimating from the preamble is this design's choice: the paper names a
// channel estimation block but not its method.
module rx_chan_est #(
  parameter int SW = owc_pkg::ADC_W + $clog2(owc_pkg::RX_DS) + $clog2(owc_pkg::RX_SPB) + 7,
  localparam int MW = SW - 7
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          load,
  input  logic [SW-1:0] s1,
  input  logic [SW-1:0] s0,
  output logic [MW-1:0] mid,
  output logic [MW-1:0] amp,
  output logic [4:0]    shift,
  output logic          est_valid
);
  logic [SW:0]   tot;
  logic [SW-1:0] dif;
  logic [MW-1:0] a;
  logic [4:0]    msb, sh;

  always_comb begin
    tot = {1'b0, s1} + {1'b0, s0};
    dif = (s1 > s0) ? s1 - s0 : '0;
    a   = MW'(dif >> 7);
    msb = '0;
    for (int i = 0; i < MW; i++) if (a[i]) msb = 5'(i);
    sh  = (msb > 5'd6) ? msb - 5'd6 : 5'd0;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      mid <= '0; amp <= '0; shift <= '0; est_valid <= 1'b0;
    end else begin
      est_valid <= load;
      if (load) begin
        mid   <= MW'(tot >> 8);
        amp   <= a;
        shift <= sh;
      end
    end
  end
endmodule
