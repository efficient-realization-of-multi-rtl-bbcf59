// owc_channel_model: behavioural model of the analog path of one link,
// DAC -> Bias-T -> LED -> water -> wavy surface -> air -> APD -> ADC, for
// all channels. Not part of the design.
// Each channel c has its own LED-APD pair (no crosstalk). The DAC code
// (tx clock) sets the light level; at every rx clock the ADC sample is
//   off + gain_c(t) * dac / 16383 + uniform noise in [-NOISE, NOISE],
// where gain_c(t) = GAIN[c] * (1 + 0.2 sin(2 pi t / 3 ms + c)) models the
// slow gain swing of a wavy surface. A testbench can ask for one bit of
// one frame to be inverted (flip_*), which models a deep fade on that bit:
// frames are found on the DAC side as the first non-zero code after idle.
module owc_channel_model #(
  parameter int N     = 3,
  parameter int OFF   = 600,
  parameter int NOISE = 150,
  parameter int CPB   = 25,
  parameter int FB    = 2432
) (
  input  logic        tx_clk,
  input  logic        rx_clk,
  input  logic [13:0] dac [N],
  output logic [11:0] adc [N]
);
  int  gain [N] = '{2000, 1300, 1600};
  int  flip_ch [$], flip_frame [$], flip_bit [$];
  int  level [N];
  int  nframe [N], phase [N];
  bit  active [N];
  longint tcyc = 0;

  initial for (int c = 0; c < N; c++) begin nframe[c] = 0; phase[c] = 0; active[c] = 0; level[c] = 0; end

  always @(posedge tx_clk) begin
    tcyc++;
    for (int c = 0; c < N; c++) begin
      automatic int d = int'(dac[c]);
      if (!active[c] && d != 0) begin active[c] = 1; phase[c] = 0; end
      if (active[c]) begin
        foreach (flip_ch[k])
          if (flip_ch[k] == c && flip_frame[k] == nframe[c] && phase[c] / CPB == flip_bit[k])
            d = 16383 - d;
        phase[c]++;
        if (phase[c] == FB * CPB) begin active[c] = 0; nframe[c]++; end
      end
      level[c] = d;
    end
  end

  always @(negedge rx_clk) begin
    for (int c = 0; c < N; c++) begin
      automatic real g = gain[c] * (1.0 + 0.2 * $sin(2.0 * 3.14159265 * real'(tcyc) / 375000.0 + c));
      automatic int v = OFF + int'(g * real'(level[c]) / 16383.0) + int'($urandom_range(2 * NOISE)) - NOISE;
      if (v < 0) v = 0;
      if (v > 4095) v = 4095;
      adc[c] = 12'(v);
    end
  end
endmodule
