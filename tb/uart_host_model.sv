// uart_host_model: behavioural model of the host PC and its USB-to-TTL
// bridge for one stream. Bytes queued with push() are sent as 8N1
// characters, LSB first, at CPB clocks per bit; before each character the
// model waits while rts_n is high (the FPGA asks it to pause). `paused`
// counts characters that had to wait.
module uart_host_model #(
  parameter int CPB = 64
) (
  input  logic clk,
  input  logic rts_n,
  output logic txd
);
  byte unsigned q[$];
  int paused = 0;
  int sent = 0;

  function automatic void push(input byte unsigned b);
    q.push_back(b);
  endfunction

  initial begin
    txd = 1'b1;
    forever begin
      @(posedge clk);
      if (q.size() > 0) begin
        automatic byte unsigned b = q.pop_front();
        if (rts_n) begin
          paused++;
          while (rts_n) @(posedge clk);
        end
        txd = 1'b0; repeat (CPB) @(posedge clk);
        for (int i = 0; i < 8; i++) begin txd = b[i]; repeat (CPB) @(posedge clk); end
        txd = 1'b1; repeat (CPB) @(posedge clk);
        sent++;
      end
    end
  end
endmodule
