// tb_fifo_sync: random writes and reads against a queue model; checks the
// head word, count, full and empty every clock, including runs to full and
// to empty.
module tb_fifo_sync;
  localparam int W = 8, D = 512;
  logic clk = 0, rst = 1;
  logic wr_en = 0, rd_en = 0; logic [W-1:0] wr_data = 0, rd_data;
  logic [$clog2(D):0] count; logic full, empty;
  int checks = 0, failures = 0, n_full = 0, n_empty = 0;
  logic [W-1:0] q[$];
  always #5 clk = ~clk;

  fifo_sync #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    int pw;
    repeat (3) @(posedge clk); rst = 0;
    for (int ph = 0; ph < 6; ph++) begin
      pw = (ph % 2 == 0) ? 85 : 15;     // fill-biased, then drain-biased
      for (int i = 0; i < 1500; i++) begin
        @(negedge clk);
        chk(count == ($clog2(D)+1)'(q.size()), $sformatf("count %0d vs %0d", count, q.size()));
        chk(full == (q.size() == D) && empty == (q.size() == 0), "flags");
        if (q.size() > 0) chk(rd_data == q[0], "head");
        if (full) n_full++;
        if (empty) n_empty++;
        wr_en = ($urandom_range(99) < pw) && !full;
        rd_en = ($urandom_range(99) >= pw) && !empty;
        wr_data = W'($urandom);
        @(posedge clk);
        if (rd_en) void'(q.pop_front());
        if (wr_en) q.push_back(wr_data);
      end
    end
    chk(n_full > 0 && n_empty > 0, "reached full and empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
