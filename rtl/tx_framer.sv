// tx_framer: forms the air frame of one stream in the frame FIFO.
//
// A frame is the 256-bit sync sequence followed by the 2176-bit LDPC
// codeword, as in the published frame format. When the frame FIFO has room
// for a whole frame (2432 bits) the framer writes the sync sequence, one bit
// per clock, and then accepts the codeword from the encoder (cw_ready high)
// and copies it into the FIFO. frame_done pulses for one clock after the last
// codeword bit, telling the modulator that one more complete frame is queued.
// Waiting for room for a whole frame is this design's choice.
module tx_framer #(
  parameter int FIFO_DEPTH = 4096
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      cw_valid,
  input  logic                      cw_data,
  input  logic                      cw_last,
  output logic                      cw_ready,
  output logic                      ff_wr,
  output logic                      ff_data,
  input  logic [$clog2(FIFO_DEPTH):0] ff_count,
  output logic                      frame_done
);
  import owc_pkg::*;
  typedef enum logic [1:0] {IDLE, SYNC, CODE} state_t;
  state_t state;
  logic [11:0] idx;

  initial assert (FIFO_DEPTH >= FRAME_BITS);

  assign cw_ready = (state == CODE);
  assign ff_wr    = (state == SYNC) || (state == CODE && cw_valid);
  assign ff_data  = (state == SYNC) ? SYNC_SEQ[idx[7:0]] : cw_data;

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= IDLE; idx <= '0; frame_done <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      case (state)
        IDLE: if (int'(ff_count) <= FIFO_DEPTH - FRAME_BITS) begin
          state <= SYNC; idx <= '0;
        end
        SYNC: begin
          if (idx == 12'(SYNC_BITS-1)) begin state <= CODE; idx <= '0; end
          else idx <= idx + 1'b1;
        end
        CODE: if (cw_valid) begin
          idx <= idx + 1'b1;
          if (cw_last) begin
            state <= IDLE; frame_done <= 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  // The encoder must deliver exactly N_CODE bits per frame.
  a_cw_len: assert property (@(posedge clk) disable iff (rst)
    (state == CODE && cw_valid) |-> (cw_last == (idx == 12'(N_CODE-1))));
endmodule
