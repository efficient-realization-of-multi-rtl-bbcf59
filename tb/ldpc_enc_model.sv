// ldpc_enc_model: behavioural stand-in for the LDPC encoder IP core.
//
// Not the 5G-NR BG2 code: it has the core's lengths (1280 information bits
// in, 2176 coded bits out) and a bit-serial valid/ready interface, but the
// code is a simple systematic one: the 1280 information bits, then 896
// parity bits p[j] = u[j] ^ u[j+896] (u[j+896] taken as 0 for j >= 384).
// `stall` holds i_ready low, to let a testbench back up the transmitter.
module ldpc_enc_model #(
  parameter int K = 1280,
  parameter int N = 2176
) (
  input  logic clk,
  input  logic rst,
  input  logic stall,
  input  logic i_valid,
  input  logic i_data,
  input  logic i_last,
  output logic i_ready,
  output logic o_valid,
  output logic o_data,
  output logic o_last,
  input  logic o_ready
);
  logic u [K];
  int   n;
  logic out_phase;

  function automatic logic code_bit(int j);
    if (j < K) return u[j];
    else begin
      int p = j - K;
      return u[p] ^ ((p + (N - K) < K) ? u[p + (N - K)] : 1'b0);
    end
  endfunction

  assign i_ready = !out_phase && !stall;
  assign o_valid = out_phase;
  assign o_data  = out_phase ? code_bit(n) : 1'b0;
  assign o_last  = out_phase && (n == N - 1);

  always_ff @(posedge clk) begin
    if (rst) begin
      n <= 0; out_phase <= 1'b0;
    end else if (!out_phase) begin
      if (i_valid && i_ready) begin
        u[n] <= i_data;
        if (i_last) begin
          if (n != K - 1) $error("encoder model: frame of %0d bits", n + 1);
          n <= 0; out_phase <= 1'b1;
        end else n <= n + 1;
      end
    end else if (o_ready) begin
      if (n == N - 1) begin n <= 0; out_phase <= 1'b0; end
      else n <= n + 1;
    end
  end
endmodule
