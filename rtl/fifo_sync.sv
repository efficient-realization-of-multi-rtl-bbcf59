// fifo_sync: single-clock first-in first-out buffer.
//
// Used twice per transmit stream: as the byte FIFO that collects the host's
// serial data and as the bit-wide frame FIFO that holds a framed codeword
// until its time slot. The head word is always visible on rd_data
// (show-ahead); rd_en removes it. A write and a read in the same clock are
// both taken. `count` is the fill level. Writing when full or reading when
// empty is a protocol error and is flagged by assertions. Depths are this
// design's choice.
module fifo_sync #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 512
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     rd_en,
  output logic [WIDTH-1:0]         rd_data,
  output logic [$clog2(DEPTH):0]   count,
  output logic                     full,
  output logic                     empty
);
  localparam int AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] wptr, rptr;

  assign full    = (count == ($clog2(DEPTH)+1)'(DEPTH));
  assign empty   = (count == '0);
  assign rd_data = mem[rptr];

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wptr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr <= '0; rptr <= '0; count <= '0;
    end else begin
      if (wr_en && !full)  wptr <= (int'(wptr) == DEPTH-1) ? '0 : wptr + 1'b1;
      if (rd_en && !empty) rptr <= (int'(rptr) == DEPTH-1) ? '0 : rptr + 1'b1;
      count <= count + (AW+1)'(wr_en && !full) - (AW+1)'(rd_en && !empty);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (rst) !(wr_en && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) !(rd_en && empty));
endmodule
