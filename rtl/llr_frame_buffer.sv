// llr_frame_buffer: one channel's LLR frame, waiting for the shared decoder.
//
// The three receive channels share one LDPC decoder, so each channel parks
// its 2176 LLRs here until the decoder scheduler takes them. A frame is
// written sequentially (wr_first starts it at address 0, wr_last ends it);
// `full` then goes high and stays high until the scheduler pulses
// release_buf after reading. Reading is asynchronous: rd_data = mem[rd_addr].
// A frame that starts while the buffer is still full is dropped whole and
// `overflow` pulses once. A single buffer per channel is this design's
// choice; with the 80 us stagger of the streams the decoder empties it long
// before the channel's next frame.
module llr_frame_buffer #(
  parameter int N  = owc_pkg::N_CODE,
  parameter int W  = owc_pkg::LLR_W,
  localparam int AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          wr_valid,
  input  logic [W-1:0]  wr_data,
  input  logic          wr_first,
  input  logic          wr_last,
  output logic          full,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data,
  input  logic          release_buf,
  output logic          overflow
);
  logic [W-1:0]  mem [N];
  logic [AW-1:0] waddr;
  logic          filling, dropping;
  logic          accept;

  assign accept  = wr_valid && ((wr_first && !full) || (filling && !wr_first));
  assign rd_data = mem[rd_addr];

  always_ff @(posedge clk)
    if (accept) mem[wr_first ? '0 : waddr] <= wr_data;

  always_ff @(posedge clk) begin
    if (rst) begin
      waddr <= '0; filling <= 1'b0; dropping <= 1'b0; full <= 1'b0; overflow <= 1'b0;
    end else begin
      overflow <= 1'b0;
      if (release_buf) full <= 1'b0;
      if (wr_valid) begin
        if (wr_first) begin
          if (full && !release_buf) begin
            dropping <= !wr_last; overflow <= 1'b1; filling <= 1'b0;
          end else begin
            filling <= !wr_last; dropping <= 1'b0; waddr <= AW'(1);
            if (wr_last) full <= 1'b1;
          end
        end else if (filling) begin
          waddr <= waddr + 1'b1;
          if (wr_last) begin filling <= 1'b0; full <= 1'b1; end
        end else if (dropping && wr_last) begin
          dropping <= 1'b0;
        end
      end
    end
  end

  a_release_when_full: assert property (@(posedge clk) disable iff (rst) release_buf |-> full);
endmodule
