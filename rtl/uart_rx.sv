// uart_rx: asynchronous serial receiver for one host data stream.
//
// The host sends each data stream through a USB-to-TTL bridge at 1953125
// baud. This receiver takes 8N1 characters, least significant bit first: it
// waits for a falling edge, checks the start bit half a bit later, then
// samples each data bit and the stop bit in its middle. `valid` pulses for
// one clock with the byte when the stop bit is sampled; `frame_err` pulses
// instead of `valid` when the stop bit is 0, and the receiver then waits
// for the line to go idle (high) before looking for the next start bit. The input is synchronised with
// two flip-flops. Baud rate and clock follow the published serial rate; the
// character format and the 125 MHz clock (64 clocks per bit) are this
// design's choice.
module uart_rx #(
  parameter int CLKS_PER_BAUD = owc_pkg::TX_CLKS_PER_BAUD
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       rxd,
  output logic [7:0] data,
  output logic       valid,
  output logic       frame_err
);
  typedef enum logic [2:0] {IDLE, START, BITS, STOP, BREAK} state_t;
  state_t state;
  logic [1:0] sync_q;
  logic [$clog2(CLKS_PER_BAUD)-1:0] cnt;
  logic [2:0] nbit;
  logic [7:0] sh;
  logic rx;

  assign rx = sync_q[1];

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= IDLE; sync_q <= 2'b11; cnt <= '0; nbit <= '0; sh <= '0;
      data <= '0; valid <= 1'b0; frame_err <= 1'b0;
    end else begin
      sync_q    <= {sync_q[0], rxd};
      valid     <= 1'b0;
      frame_err <= 1'b0;
      case (state)
        IDLE: if (!rx) begin state <= START; cnt <= '0; end
        START: begin
          if (int'(cnt) == CLKS_PER_BAUD/2 - 1) begin
            cnt <= '0;
            if (!rx) begin state <= BITS; nbit <= '0; end
            else state <= IDLE;
          end else cnt <= cnt + 1'b1;
        end
        BITS: begin
          if (int'(cnt) == CLKS_PER_BAUD - 1) begin
            cnt <= '0;
            sh  <= {rx, sh[7:1]};
            if (nbit == 3'd7) state <= STOP;
            nbit <= nbit + 1'b1;
          end else cnt <= cnt + 1'b1;
        end
        STOP: begin
          if (int'(cnt) == CLKS_PER_BAUD - 1) begin
            cnt <= '0;
            if (rx) begin state <= IDLE; data <= sh; valid <= 1'b1; end
            else begin state <= BREAK; frame_err <= 1'b1; end
          end else cnt <= cnt + 1'b1;
        end
        BREAK: if (rx) state <= IDLE;   // wait for the line to return idle
        default: state <= IDLE;
      endcase
    end
  end
endmodule
