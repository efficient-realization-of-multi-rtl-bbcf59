// tb_ldpc_dec_scheduler: three buffer models with known contents. Checks
// that each frame is streamed whole (dec_last on LLR 2175) with random
// dec_ready, that the buffer streamed is released, that with all three
// full the order is round robin after the channel served last and
// `waited` pulses, and that a single full buffer is served at once.
module tb_ldpc_dec_scheduler;
  localparam int N = 2176;
  logic clk = 0, rst = 1;
  logic [2:0] full = 0, release_buf; logic [11:0] rd_addr;
  logic [7:0] rd_data [3];
  logic dec_valid, dec_last, dec_ready = 0, busy, waited; logic [7:0] dec_data; logic [1:0] grant;
  int checks = 0, failures = 0, nwait = 0;
  always #5 clk = ~clk;
  ldpc_dec_scheduler dut (.*);
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  function automatic logic [7:0] content(int c, int a); return 8'(a * 7 + c * 85 + (a >> 8)); endfunction
  always_comb for (int c = 0; c < 3; c++) rd_data[c] = content(c, int'(rd_addr));
  int order[$]; int cnt = 0, bad = 0, cur = -1;
  always @(posedge clk) if (!rst) begin
    if (waited) nwait++;
    for (int c = 0; c < 3; c++) if (release_buf[c]) full[c] <= 1'b0;
    if (dec_valid && dec_ready) begin
      if (cnt == 0) cur = int'(grant);
      if (dec_data != content(cur, cnt)) bad++;
      if (dec_last != (cnt == N-1)) bad++;
      cnt++;
      if (dec_last) begin
        chk(bad == 0 && cnt == N, $sformatf("frame of ch %0d: %0d bad, %0d LLRs", cur, bad, cnt));
        chk(release_buf[cur] && $onehot(release_buf), "release");
        order.push_back(cur); cnt = 0; bad = 0;
      end
    end
  end
  always @(negedge clk) dec_ready = $urandom_range(4) != 0;
  initial begin
    repeat (3) @(posedge clk); rst = 0;
    @(negedge clk); full = 3'b010;                  // one channel
    wait (order.size() == 1);
    chk(order[0] == 1, "single channel served");
    @(negedge clk); full = 3'b111;                  // all three
    wait (order.size() == 4);
    chk(order[1] == 2 && order[2] == 0 && order[3] == 1, $sformatf("round robin %0d %0d %0d", order[1], order[2], order[3]));
    chk(nwait == 2, $sformatf("waited %0d", nwait));
    @(negedge clk); full = 3'b001;
    wait (order.size() == 5);
    chk(order[4] == 0, "channel 0");
    repeat (5) @(posedge clk);
    chk(!busy && !dec_valid, "idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
