// ldpc_dec_model: behavioural stand-in for the min-sum LDPC decoder IP core.
//
// Takes 2176 LLRs per frame (valid/ready, positive = bit 0), makes a hard
// decision on the first 1280 (the systematic bits of the stand-in code of
// ldpc_enc_model), waits LAT clocks as a decoding latency and returns the
// 1280 bits one per clock on m_valid/m_data/m_last. It accepts no new frame
// while one is being decoded or returned, so the scheduler sees back
// pressure. It corrects no errors: errors injected in the channel reach the
// CRC checkers. `frames` counts decoded frames.
module ldpc_dec_model #(
  parameter int K   = 1280,
  parameter int N   = 2176,
  parameter int LAT = 1000
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       s_valid,
  input  logic [7:0] s_data,
  input  logic       s_last,
  output logic       s_ready,
  output logic       m_valid,
  output logic       m_data,
  output logic       m_last,
  output int         frames
);
  logic hard [K];
  int   n, wait_cnt;
  typedef enum logic [1:0] {IN, WAIT, OUT} st_t;
  st_t st;

  assign s_ready = (st == IN);
  assign m_valid = (st == OUT);
  assign m_data  = (st == OUT) ? hard[n] : 1'b0;
  assign m_last  = (st == OUT) && (n == K - 1);

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= IN; n <= 0; wait_cnt <= 0; frames <= 0;
    end else case (st)
      IN: if (s_valid) begin
        if (n < K) hard[n] <= s_data[7];
        if (s_last) begin
          if (n != N - 1) $error("decoder model: frame of %0d LLRs", n + 1);
          st <= WAIT; n <= 0; wait_cnt <= 0;
        end else n <= n + 1;
      end
      WAIT: if (wait_cnt == LAT - 1) st <= OUT; else wait_cnt <= wait_cnt + 1;
      OUT: if (n == K - 1) begin st <= IN; n <= 0; frames <= frames + 1; end
           else n <= n + 1;
      default: st <= IN;
    endcase
  end
endmodule
