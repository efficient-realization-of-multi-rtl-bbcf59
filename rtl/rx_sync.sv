// rx_sync: frame synchronization by correlation with the sync sequence.
//
// Every input sample (SPB per bit) is added to a running sum b of the last
// SPB samples, and b is shifted into a delay line of SPB*256 entries. The
// entries one bit apart that line up with the 256 sync chips are split into
// S1, the sum over the positions of 1-chips, and S0, the sum over 0-chips.
// Because the sequence has 128 ones and 128 zeros, S1-S0 is a correlation
// that does not depend on the DC level of the received light. When S1-S0
// exceeds `thresh` the block looks PW samples further for the largest
// value; at the end of that window it pulses `det` and gives:
//   skip   - how many samples of the delayed output x_del to drop so that
//            the next sample of x_del is the first sample of codeword bit 0
//   s1, s0 - the sums at the peak, for channel estimation.
// x_del is the input delayed by PW samples (x_del_valid follows x_valid).
// The search starts once the delay line has been filled after reset (the
// line itself is not reset), and after a detection it is held off for the
// length of the codeword.
// Synchronization by the 256-bit sequence follows the paper; the correlator,
// threshold and peak search are this design's choice.
module rx_sync #(
  parameter int XW   = owc_pkg::ADC_W + $clog2(owc_pkg::RX_DS),
  parameter int SPB  = owc_pkg::RX_SPB,
  parameter int PW   = 2 * owc_pkg::RX_SPB,
  localparam int BW  = XW + $clog2(SPB),
  localparam int SW  = BW + 7,
  localparam int KW  = $clog2(PW + 1)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [XW-1:0] x,
  input  logic          x_valid,
  input  logic [SW-1:0] thresh,
  output logic          det,
  output logic [KW-1:0] skip,
  output logic [SW-1:0] s1,
  output logic [SW-1:0] s0,
  output logic [XW-1:0] x_del,
  output logic          x_del_valid
);
  import owc_pkg::*;
  localparam int DL   = SPB * SYNC_BITS;
  localparam int HOLD = SPB * N_CODE;

  logic [XW-1:0] win  [SPB];   // last SPB samples
  logic [XW-1:0] xdl  [PW];    // raw sample delay for x_del
  logic [BW-1:0] dly  [DL];    // delay line of bit sums
  logic [BW-1:0] b;
  logic [SW-1:0] c1, c0;
  logic signed [SW:0] corr, best;
  typedef enum logic [1:0] {SEARCH, PEAK, HOLDOFF} state_t;
  state_t state;
  logic [KW-1:0] wcnt, bestk;
  logic [$clog2(HOLD+1)-1:0] hcnt;
  logic [$clog2(DL+1)-1:0]   fill;   // samples since reset, up to DL

  // Sum of the newest SPB samples including the one arriving now.
  always_comb begin
    b = BW'(x);
    for (int i = 0; i < SPB - 1; i++) b += BW'(win[i]);
  end

  // Correlator over the delay line after it has shifted in b: chip i (sent
  // i-th) sits at dly position SPB*(255-i), i.e. position SPB*(255-i)-1 of
  // the old line, or b itself for i = 255.
  always_comb begin
    c1 = '0; c0 = '0;
    for (int i = 0; i < SYNC_BITS; i++) begin
      if (i == SYNC_BITS - 1) begin
        if (SYNC_SEQ[i]) c1 += SW'(b); else c0 += SW'(b);
      end else begin
        if (SYNC_SEQ[i]) c1 += SW'(dly[SPB*(SYNC_BITS-1-i)-1]);
        else             c0 += SW'(dly[SPB*(SYNC_BITS-1-i)-1]);
      end
    end
    corr = $signed({1'b0, c1}) - $signed({1'b0, c0});
  end

  always_ff @(posedge clk) begin
    if (x_valid) begin
      win[0] <= x;
      for (int i = 1; i < SPB; i++) win[i] <= win[i-1];
      xdl[0] <= x;
      for (int i = 1; i < PW; i++) xdl[i] <= xdl[i-1];
      dly[0] <= b;
      for (int i = 1; i < DL; i++) dly[i] <= dly[i-1];
    end
  end

  assign x_del       = xdl[PW-1];
  assign x_del_valid = x_valid;

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= SEARCH; fill <= '0; wcnt <= '0; bestk <= '0; best <= '0; hcnt <= '0;
      det <= 1'b0; skip <= '0; s1 <= '0; s0 <= '0;
    end else begin
      det <= 1'b0;
      if (x_valid) begin
        if (int'(fill) < DL) fill <= fill + 1'b1;
        case (state)
          SEARCH: if (int'(fill) >= DL && corr > $signed({1'b0, thresh})) begin
            state <= PEAK; wcnt <= KW'(1); bestk <= '0; best <= corr; s1 <= c1; s0 <= c0;
          end
          PEAK: begin
            if (corr > best) begin best <= corr; bestk <= wcnt; s1 <= c1; s0 <= c0; end
            if (int'(wcnt) == PW - 1) begin
              state <= HOLDOFF;
              det   <= 1'b1;
              skip  <= ((corr > best) ? wcnt : bestk) + 1'b1;
              hcnt  <= '0;
            end else wcnt <= wcnt + 1'b1;
          end
          HOLDOFF: begin
            if (int'(hcnt) == HOLD - 1) state <= SEARCH;
            else hcnt <= hcnt + 1'b1;
          end
          default: state <= SEARCH;
        endcase
      end
    end
  end
endmodule
