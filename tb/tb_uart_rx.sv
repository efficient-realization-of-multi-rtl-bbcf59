// tb_uart_rx: sends 8N1 characters at 64 clocks per bit to uart_rx and
// checks each byte, the time from start edge to `valid` (9.5 bit times plus
// the two-flop synchroniser) and that a 0 stop bit gives frame_err.
module tb_uart_rx;
  localparam int CPB = 64;
  logic clk = 0, rst = 1, rxd = 1;
  logic [7:0] data; logic valid, frame_err;
  int checks = 0, failures = 0;
  always #4 clk = ~clk;

  uart_rx dut (.clk, .rst, .rxd, .data, .valid, .frame_err);

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic send(input logic [7:0] b, input bit stop);
    rxd = 0; t_start.push_back(cyc); repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; repeat (CPB) @(posedge clk); end
    rxd = stop; repeat (CPB) @(posedge clk);
    rxd = 1; repeat (CPB/2) @(posedge clk);
  endtask

  logic [7:0] exp_q[$];
  int t_start[$], n_ok = 0, n_ferr = 0, cyc = 0;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (!rst) begin
    if (valid) begin
      automatic int lat;
      lat = cyc - t_start.pop_front();
      begin automatic logic [7:0] e = exp_q.pop_front(); chk(data == e, $sformatf("byte %02x exp %02x", data, e)); end
      chk(lat >= CPB*9 + CPB/2 && lat <= CPB*9 + CPB/2 + 4, $sformatf("latency %0d", lat));
      n_ok++;
    end
    if (frame_err) begin n_ferr++; void'(t_start.pop_front()); end
  end

  initial begin
    repeat (5) @(posedge clk); rst = 0; repeat (5) @(posedge clk);
    for (int k = 0; k < 30; k++) begin
      logic [7:0] b = 8'($urandom);
      exp_q.push_back(b); send(b, 1);
    end
    send(8'h55, 0);
    exp_q.push_back(8'hA3); send(8'hA3, 1);
    repeat (100) @(posedge clk);
    chk(n_ok == 31, $sformatf("received %0d bytes", n_ok));
    chk(n_ferr == 1, "one framing error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
