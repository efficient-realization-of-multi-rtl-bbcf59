// tx_packetizer: builds the 1280 LDPC information bits of one frame.
//
// When the input byte FIFO holds a full payload (153 bytes = 1224 bits) the
// packetizer sends, as a bit stream with valid/ready handshake, the 32-bit
// address of its channel, then the payload (each byte most significant bit
// first), then the 24-bit CRC of address and payload. The order address ->
// payload -> CRC and all lengths follow the published transmitter; the CRC
// polynomial (CRC24A), bit order within a byte and the address value are this
// design's choices. One bit moves per clock while enc_ready is high; enc_last
// marks bit 1279. A byte is popped from the FIFO after its eighth bit.
module tx_packetizer #(
  parameter owc_pkg::addr_t CH_ADDR = owc_pkg::ch_addr(0),
  parameter int             CNT_W   = 10
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [CNT_W-1:0] fifo_count,
  input  logic [7:0]       fifo_data,
  output logic             fifo_rd,
  output logic             enc_valid,
  output logic             enc_data,
  output logic             enc_last,
  input  logic             enc_ready
);
  import owc_pkg::*;
  typedef enum logic [1:0] {IDLE, ADDR, DATA, CRC} state_t;
  state_t state;
  logic [10:0] idx;       // bit index inside the current field
  logic [23:0] crc;
  logic        take;

  assign enc_valid = (state != IDLE);
  assign take      = enc_valid && enc_ready;

  always_comb begin
    case (state)
      ADDR:    enc_data = CH_ADDR[5'(ADDR_BITS-1) - idx[4:0]];
      DATA:    enc_data = fifo_data[7 - idx[2:0]];
      CRC:     enc_data = crc[23];
      default: enc_data = 1'b0;
    endcase
  end
  assign enc_last = (state == CRC) && (idx == 11'(CRC_BITS-1));
  assign fifo_rd  = take && (state == DATA) && (idx[2:0] == 3'd7);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= IDLE; idx <= '0; crc <= '0;
    end else begin
      case (state)
        IDLE: if (int'(fifo_count) >= PAYLOAD_BYTES) begin
          state <= ADDR; idx <= '0; crc <= '0;
        end
        ADDR: if (take) begin
          crc <= crc24_next(crc, enc_data);
          if (idx == 11'(ADDR_BITS-1)) begin state <= DATA; idx <= '0; end
          else idx <= idx + 1'b1;
        end
        DATA: if (take) begin
          crc <= crc24_next(crc, enc_data);
          if (idx == 11'(PAYLOAD_BITS-1)) begin state <= CRC; idx <= '0; end
          else idx <= idx + 1'b1;
        end
        CRC: if (take) begin
          crc <= {crc[22:0], 1'b0};
          if (enc_last) begin state <= IDLE; idx <= '0; end
          else idx <= idx + 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
