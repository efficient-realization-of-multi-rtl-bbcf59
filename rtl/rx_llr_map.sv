// rx_llr_map: soft bit to LLR mapping for the min-sum LDPC decoder.
//
// llr = saturate_LLR_W((mid - y) >>> shift), registered (one clock of
// latency; first/last travel with the value). A positive LLR means bit 0
// (light off), a negative one bit 1. The value is proportional to the
// distance of the soft bit from the decision midpoint, normalised by the
// amplitude estimate; a min-sum decoder needs no noise-variance scaling, as
// its decisions do not change when all LLRs are scaled by one factor. The
// mapping and the sign convention are this design's choice.
module rx_llr_map #(
  parameter int BW    = owc_pkg::ADC_W + $clog2(owc_pkg::RX_DS) + $clog2(owc_pkg::RX_SPB),
  parameter int LLR_W = owc_pkg::LLR_W
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    sb_valid,
  input  logic [BW-1:0]           sb_data,
  input  logic                    sb_first,
  input  logic                    sb_last,
  input  logic [BW-1:0]           mid,
  input  logic [4:0]              shift,
  output logic                    llr_valid,
  output logic signed [LLR_W-1:0] llr,
  output logic                    llr_first,
  output logic                    llr_last
);
  localparam logic signed [BW:0] MAXV = (BW+1)'(2**(LLR_W-1) - 1);
  localparam logic signed [BW:0] MINV = -(BW+1)'(2**(LLR_W-1) - 1);
  logic signed [BW:0] d, q;

  always_comb begin
    d = $signed({1'b0, mid}) - $signed({1'b0, sb_data});
    q = d >>> shift;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      llr_valid <= 1'b0; llr <= '0; llr_first <= 1'b0; llr_last <= 1'b0;
    end else begin
      llr_valid <= sb_valid;
      llr_first <= sb_first;
      llr_last  <= sb_last;
      if (sb_valid) begin
        if (q > MAXV)      llr <= MAXV[LLR_W-1:0];
        else if (q < MINV) llr <= MINV[LLR_W-1:0];
        else               llr <= q[LLR_W-1:0];
      end
    end
  end
endmodule
