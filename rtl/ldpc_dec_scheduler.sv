// ldpc_dec_scheduler: time-multiplexing of one LDPC decoder over N_CH
// channels.
//
// This is the resource-saving core of the receiver: instead of one decoder
// per channel, the channels' frames are decoded one after another by a
// single decoder core. The transmitter staggers the streams by 80 us, so
// the channels' LLR buffers normally fill at different times; when several
// are full at once they are served in round-robin order after the channel
// served last (`waited` pulses when a frame had to wait for another
// channel's frame). The chosen buffer is streamed into the decoder, one LLR
// per accepted beat (valid/ready, dec_last on LLR N-1), and released after
// its last LLR. `grant` names the channel being streamed and `busy` is high
// while streaming. The decoder receives no channel tag: the streams are told
// apart after decoding by the address in each frame, as in the paper. The
// arbitration order is this design's choice.
module ldpc_dec_scheduler #(
  parameter int N_CH = owc_pkg::N_CH,
  parameter int N    = owc_pkg::N_CODE,
  parameter int W    = owc_pkg::LLR_W,
  localparam int AW  = $clog2(N),
  localparam int GW  = (N_CH > 1) ? $clog2(N_CH) : 1
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [N_CH-1:0] full,
  output logic [AW-1:0]   rd_addr,
  input  logic [W-1:0]    rd_data [N_CH],
  output logic [N_CH-1:0] release_buf,
  output logic            dec_valid,
  output logic [W-1:0]    dec_data,
  output logic            dec_last,
  input  logic            dec_ready,
  output logic [GW-1:0]   grant,
  output logic            busy,
  output logic            waited
);
  logic [GW-1:0] last_served, pick;
  logic          any;
  int unsigned   nfull;

  // Round-robin choice: first full channel after last_served.
  always_comb begin
    any = 1'b0; pick = '0; nfull = 0;
    for (int i = 0; i < N_CH; i++) if (full[i]) nfull++;
    for (int k = 1; k <= N_CH; k++) begin
      int unsigned c;
      c = (int'(last_served) + k) % N_CH;
      if (!any && full[c]) begin any = 1'b1; pick = GW'(c); end
    end
  end

  assign dec_valid = busy;
  assign dec_data  = rd_data[grant];
  assign dec_last  = busy && (int'(rd_addr) == N - 1);

  // Release the buffer with the handshake of its last LLR.
  always_comb begin
    release_buf = '0;
    release_buf[grant] = dec_valid && dec_ready && dec_last;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0; grant <= '0; last_served <= GW'(N_CH - 1); rd_addr <= '0;
      waited <= 1'b0;
    end else begin
      waited      <= 1'b0;
      if (!busy) begin
        if (any) begin
          busy <= 1'b1; grant <= pick; last_served <= pick; rd_addr <= '0;
          waited <= (nfull > 1);
        end
      end else if (dec_ready) begin
        if (dec_last) busy <= 1'b0;
        else begin
          rd_addr <= rd_addr + 1'b1;
        end
      end
    end
  end

  a_grant_full: assert property (@(posedge clk) disable iff (rst) busy |-> full[grant]);
  a_hold: assert property (@(posedge clk) disable iff (rst)
    (dec_valid && !dec_ready) |=> (dec_valid && $stable(rd_addr) && $stable(grant)));
endmodule
