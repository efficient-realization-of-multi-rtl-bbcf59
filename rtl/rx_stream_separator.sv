// rx_stream_separator: splits the shared decoder's output back into the
// three data streams.
//
// Every decoded frame (1280 bits, one per d_valid, d_last on the final bit)
// starts with the 32-bit address of the stream that sent it. The separator
// shifts in the address; on its 32nd bit it compares it with the sending
// addresses of all channels. On a match it pulses crc_start for that
// channel (with the address on crc_addr) and passes the remaining 1248 bits
// to that channel's CRC checker (crc_valid[ch], crc_bit, crc_last); the
// first 1224 of them are also given out as payload (pl_valid, pl_bit,
// pl_ch, pl_last on the last payload bit). A frame whose address matches
// no channel is dropped and addr_miss pulses. Separation by address
// follows the paper; dropping unknown addresses is this design's choice.
module rx_stream_separator #(
  parameter int N_CH = owc_pkg::N_CH,
  localparam int GW  = (N_CH > 1) ? $clog2(N_CH) : 1
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 d_valid,
  input  logic                 d_data,
  input  logic                 d_last,
  output logic [N_CH-1:0]      crc_start,
  output owc_pkg::addr_t       crc_addr,
  output logic [N_CH-1:0]      crc_valid,
  output logic                 crc_bit,
  output logic                 crc_last,
  output logic                 pl_valid,
  output logic                 pl_bit,
  output logic [GW-1:0]        pl_ch,
  output logic                 pl_last,
  output logic                 addr_miss
);
  import owc_pkg::*;
  typedef enum logic [1:0] {ADDR, BODY, DROP} state_t;
  state_t state;
  logic [10:0]   idx;
  addr_t         sh, nxt_addr;
  logic [GW-1:0] sel, hit_ch;
  logic          hit;

  assign nxt_addr = {sh[ADDR_BITS-2:0], d_data};

  always_comb begin
    hit = 1'b0; hit_ch = '0;
    for (int c = 0; c < N_CH; c++)
      if (nxt_addr == ch_addr(c)) begin hit = 1'b1; hit_ch = GW'(c); end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= ADDR; idx <= '0; sh <= '0; sel <= '0;
      crc_start <= '0; crc_addr <= '0; crc_valid <= '0; crc_bit <= 1'b0; crc_last <= 1'b0;
      pl_valid <= 1'b0; pl_bit <= 1'b0; pl_ch <= '0; pl_last <= 1'b0; addr_miss <= 1'b0;
    end else begin
      crc_start <= '0; crc_valid <= '0; crc_last <= 1'b0;
      pl_valid  <= 1'b0; pl_last <= 1'b0; addr_miss <= 1'b0;
      if (d_valid) begin
        case (state)
          ADDR: begin
            sh <= nxt_addr;
            if (d_last) begin
              idx <= '0;                       // runt frame: resynchronise
            end else if (idx == 11'(ADDR_BITS-1)) begin
              idx <= '0;
              if (hit) begin
                state <= BODY; sel <= hit_ch;
                crc_start[hit_ch] <= 1'b1; crc_addr <= nxt_addr;
              end else begin
                state <= DROP; addr_miss <= 1'b1;
              end
            end else idx <= idx + 1'b1;
          end
          BODY: begin
            crc_valid[sel] <= 1'b1;
            crc_bit        <= d_data;
            crc_last       <= d_last;
            if (int'(idx) < PAYLOAD_BITS) begin
              pl_valid <= 1'b1; pl_bit <= d_data; pl_ch <= sel;
              pl_last  <= (idx == 11'(PAYLOAD_BITS-1));
            end
            idx <= idx + 1'b1;
            if (d_last) begin state <= ADDR; idx <= '0; end
          end
          DROP: if (d_last) begin state <= ADDR; idx <= '0; end
          default: state <= ADDR;
        endcase
      end
    end
  end
endmodule
