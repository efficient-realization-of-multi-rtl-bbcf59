// tb_llr_frame_buffer: writes a frame, reads every address back, checks
// `full`; writes a second frame while full and checks that it is dropped
// (overflow pulse, contents unchanged); releases and writes a third frame
// with random valid gaps.
module tb_llr_frame_buffer;
  localparam int N = 2176;
  logic clk = 0, rst = 1;
  logic wr_valid = 0, wr_first = 0, wr_last = 0, release_buf = 0, full, overflow;
  logic [7:0] wr_data = 0, rd_data; logic [11:0] rd_addr = 0;
  int checks = 0, failures = 0, novf = 0;
  always #5 clk = ~clk;
  llr_frame_buffer dut (.*);
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  always @(posedge clk) if (!rst && overflow) novf++;
  logic [7:0] fr [N];
  task automatic write_frame(input bit keep, input bit gaps);
    for (int i = 0; i < N; i++) begin
      automatic logic [7:0] v = 8'($urandom);
      if (keep) fr[i] = v;
      if (gaps) while ($urandom_range(2) == 0) begin @(negedge clk); wr_valid = 0; end
      @(negedge clk); wr_valid = 1; wr_data = v; wr_first = (i == 0); wr_last = (i == N-1);
    end
    @(negedge clk); wr_valid = 0; wr_first = 0; wr_last = 0;
  endtask
  task automatic read_check(input string tag);
    automatic int bad = 0;
    for (int i = 0; i < N; i++) begin
      @(negedge clk); rd_addr = 12'(i); #1;
      if (rd_data != fr[i]) bad++;
    end
    chk(bad == 0, $sformatf("%s: %0d wrong", tag, bad));
  endtask
  initial begin
    repeat (3) @(posedge clk); rst = 0;
    @(negedge clk); chk(!full, "empty after reset");
    write_frame(1, 0);
    @(negedge clk); chk(full, "full after frame");
    read_check("frame 1");
    write_frame(0, 0);
    chk(novf == 1, "overflow on frame while full");
    read_check("frame 1 kept");
    @(negedge clk); release_buf = 1; @(negedge clk); release_buf = 0;
    chk(!full, "released");
    write_frame(1, 1);
    @(negedge clk); chk(full, "full again");
    read_check("frame 3");
    chk(novf == 1, "no extra overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (60000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
