// rx_downsample: decimation of one APD channel's ADC samples.
//
// The ADC samples at 100 MSPS, 20 samples per 5 Mbps OOK bit. This block sums
// DS consecutive samples (integrate and dump) and outputs the sum with a
// one-clock y_valid strobe every DS clocks, giving 4 samples per bit for the
// synchronizer. The sum keeps full precision (IN_W + clog2(DS) bits).
// Downsampling itself follows the paper; the boxcar filter and the factor 5
// are this design's choice.
module rx_downsample #(
  parameter int IN_W = owc_pkg::ADC_W,
  parameter int DS   = owc_pkg::RX_DS,
  localparam int OW  = IN_W + $clog2(DS)
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [IN_W-1:0] adc,
  output logic [OW-1:0]   y,
  output logic            y_valid
);
  logic [$clog2(DS)-1:0] cnt;
  logic [OW-1:0]         acc;

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt <= '0; acc <= '0; y <= '0; y_valid <= 1'b0;
    end else begin
      y_valid <= 1'b0;
      if (int'(cnt) == DS - 1) begin
        cnt     <= '0;
        y       <= acc + OW'(adc);
        y_valid <= 1'b1;
        acc     <= '0;
      end else begin
        cnt <= cnt + 1'b1;
        acc <= acc + OW'(adc);
      end
    end
  end
endmodule
