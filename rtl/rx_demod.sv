// rx_demod: OOK demodulation of one frame's codeword.
//
// After the synchronizer's det pulse the block drops `skip` samples of the
// delayed sample stream, then sums each following group of SPB samples
// (integrate and dump over one bit) and outputs the sum as the soft value of
// one code bit, N_CODE times. sb_valid pulses one clock after the last
// sample of a bit; sb_first and sb_last mark bits 0 and N_CODE-1. The
// integrate-and-dump detector is this design's choice.
module rx_demod #(
  parameter int XW  = owc_pkg::ADC_W + $clog2(owc_pkg::RX_DS),
  parameter int SPB = owc_pkg::RX_SPB,
  parameter int KW  = $clog2(2 * owc_pkg::RX_SPB + 1),
  localparam int BW = XW + $clog2(SPB)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [XW-1:0] x_del,
  input  logic          x_del_valid,
  input  logic          det,
  input  logic [KW-1:0] skip,
  output logic          sb_valid,
  output logic [BW-1:0] sb_data,
  output logic          sb_first,
  output logic          sb_last,
  output logic          busy
);
  import owc_pkg::*;
  typedef enum logic [1:0] {IDLE, SKIP, BITS} state_t;
  state_t state;
  logic [KW-1:0]          scnt;
  logic [$clog2(SPB)-1:0] pcnt;
  logic [11:0]            nbit;
  logic [BW-1:0]          acc;

  assign busy = (state != IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= IDLE; scnt <= '0; pcnt <= '0; nbit <= '0; acc <= '0;
      sb_valid <= 1'b0; sb_data <= '0; sb_first <= 1'b0; sb_last <= 1'b0;
    end else begin
      sb_valid <= 1'b0;
      case (state)
        IDLE: if (det) begin state <= SKIP; scnt <= skip; end
        SKIP: if (x_del_valid) begin
          if (scnt == KW'(1)) begin state <= BITS; pcnt <= '0; nbit <= '0; acc <= '0; end
          scnt <= scnt - 1'b1;
        end
        BITS: if (x_del_valid) begin
          if (int'(pcnt) == SPB - 1) begin
            sb_valid <= 1'b1;
            sb_data  <= acc + BW'(x_del);
            sb_first <= (nbit == '0);
            sb_last  <= (nbit == 12'(N_CODE-1));
            acc      <= '0;
            pcnt     <= '0;
            if (nbit == 12'(N_CODE-1)) state <= IDLE;
            nbit <= nbit + 1'b1;
          end else begin
            acc  <= acc + BW'(x_del);
            pcnt <= pcnt + 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  a_skip_nonzero: assert property (@(posedge clk) disable iff (rst) det |-> skip != '0);
endmodule
