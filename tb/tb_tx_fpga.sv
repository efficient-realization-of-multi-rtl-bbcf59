// tb_tx_fpga: the three transmit streams end to end, with host models on
// the UART lines and encoder models on the encoder ports. Each stream gets
// two random payloads. Checks every recovered DAC frame bit by bit against
// an independent reference (sync sequence + stand-in code of address,
// payload, CRC-24), that the streams' frames start k*80 us apart within a
// common 800 us slot grid, the frames_sent and guard_slots counters, and
// that RTS flow control paused the host of stream 0 while its encoder was
// stalled (input FIFO reduced to 256 bytes for this test).
module tb_tx_fpga;
  import tb_ref_pkg::*;
  localparam int N = 3;
  logic clk = 0, rst = 1;
  logic [N-1:0] uart_rxd, uart_rts_n;
  logic [N-1:0] enc_i_valid, enc_i_data, enc_i_last, enc_i_ready;
  logic [N-1:0] enc_o_valid, enc_o_data, enc_o_last, enc_o_ready;
  logic [13:0]  dac_code [N];
  logic [31:0]  frames_sent [N], guard_slots [N];
  logic [N-1:0] stall = '0;
  int checks = 0, failures = 0;
  always #4 clk = ~clk;

  tx_fpga #(.IN_DEPTH(256)) dut (.*);

  for (genvar c = 0; c < N; c++) begin : g
    uart_host_model host (.clk, .rts_n(uart_rts_n[c]), .txd(uart_rxd[c]));
    ldpc_enc_model  enc (.clk, .rst, .stall(stall[c]), .i_valid(enc_i_valid[c]),
      .i_data(enc_i_data[c]), .i_last(enc_i_last[c]), .i_ready(enc_i_ready[c]),
      .o_valid(enc_o_valid[c]), .o_data(enc_o_data[c]), .o_last(enc_o_last[c]),
      .o_ready(enc_o_ready[c]));
    tx_frame_catcher cat (.clk, .rst, .dac(dac_code[c]));
  end

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  byte unsigned pl [N][2][$];
  int rts_seen = 0;
  always @(posedge clk) if (!rst && uart_rts_n[0]) rts_seen++;

  initial begin
    bitq_t exp;
    repeat (5) @(posedge clk); rst = 0;
    stall[0] = 1;
    for (int c = 0; c < N; c++)
      for (int f = 0; f < 2; f++)
        for (int i = 0; i < 153; i++) begin
          automatic byte unsigned b = 8'($urandom);
          pl[c][f].push_back(b);
          case (c)
            0: g[0].host.push(b);
            1: g[1].host.push(b);
            default: g[2].host.push(b);
          endcase
        end
    // hold stream 0's encoder until its FIFO has raised RTS
    wait (rts_seen > 0);
    repeat (2000) @(posedge clk);
    stall[0] = 0;
    wait (g[0].cat.frames.size() == 2 && g[1].cat.frames.size() == 2 && g[2].cat.frames.size() == 2);
    repeat (4000 * 25) @(posedge clk);
    for (int c = 0; c < N; c++) begin
      for (int f = 0; f < 2; f++) begin
        automatic bit fr [$];
        case (c)
          0: fr = g[0].cat.frames[f];
          1: fr = g[1].cat.frames[f];
          default: fr = g[2].cat.frames[f];
        endcase
        exp = code_bits(info_bits(ADDR_REF[c], pl[c][f]));
        begin
          automatic int bad = 0;
          for (int i = 0; i < 256; i++)  if (fr[i] != SYNC_REF[i]) bad++;
          for (int i = 0; i < 2176; i++) if (fr[256+i] != exp[i]) bad++;
          chk(bad == 0, $sformatf("stream %0d frame %0d: %0d wrong bits", c, f, bad));
        end
      end
      chk(frames_sent[c] == 2, $sformatf("frames_sent[%0d]=%0d", c, frames_sent[c]));
      chk(guard_slots[c] > 0, "guard slots seen");
    end
    for (int c = 1; c < N; c++)
      for (int f = 0; f < 2; f++)
        chk(((g[0].cat.start_cyc[0] - (c == 1 ? g[1].cat.start_cyc[f] : g[2].cat.start_cyc[f])) % 100000 + 100000) % 100000
            == 100000 - c * 10000, $sformatf("stream %0d frame %0d not 80 us staggered", c, f));
    chk(g[0].host.paused > 0, "host 0 paused by RTS");
    $display("RTS pauses: %0d", g[0].host.paused);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1500000) @(posedge clk);
    failures++; $display("watchdog rts=%0d frames %0d %0d %0d sent %0d %0d %0d", rts_seen, g[0].cat.frames.size(), g[1].cat.frames.size(), g[2].cat.frames.size(), g[0].host.sent, g[1].host.sent, g[2].host.sent);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
