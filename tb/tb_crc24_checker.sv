// tb_crc24_checker: frames of address + 1224 random payload bits + CRC-24
// from the long-division reference. Checks ok for intact frames and not ok
// for frames with one flipped bit (payload, CRC or address); also checks
// the reference itself on the standard check string "123456789"
// (CRC-24 = 0xCDE703).
module tb_crc24_checker;
  import tb_ref_pkg::*;
  logic clk = 0, rst = 1;
  logic start = 0, bit_valid = 0, bit_data = 0, bit_last = 0, done, ok;
  logic [31:0] addr = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  crc24_checker dut (.*);
  task automatic chk(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic run(input bitq_t m, input logic [31:0] a_used, output bit res);
    @(negedge clk); start = 1; addr = a_used; @(negedge clk); start = 0;
    for (int i = 32; i < 1280; i++) begin
      while ($urandom_range(3) == 0) begin @(negedge clk); bit_valid = 0; end
      @(negedge clk); bit_valid = 1; bit_data = m[i]; bit_last = (i == 1279);
    end
    @(negedge clk); bit_valid = 0; bit_last = 0;
    chk(done, "done pulse");
    res = ok;
  endtask
  initial begin
    bitq_t s;
    s.delete();
    for (int c = 0; c < 9; c++) for (int i = 7; i >= 0; i--) s.push_back(((8'h31 + c) >> i) & 1);
    chk(crc24_ref(s) == 24'hCDE703, "reference check value");
    repeat (3) @(posedge clk); rst = 0;
    for (int t = 0; t < 12; t++) begin
      byte unsigned pl[$]; bitq_t m; bit r; logic [31:0] a;
      a = ADDR_REF[t % 3]; pl.delete();
      for (int i = 0; i < 153; i++) pl.push_back(8'($urandom));
      m = info_bits(a, pl);
      if (t % 3 == 0) begin
        run(m, a, r); chk(r, $sformatf("frame %0d intact", t));
      end else if (t % 3 == 1) begin
        automatic int p = $urandom_range(32, 1279);
        m[p] = !m[p];
        run(m, a, r); chk(!r, $sformatf("frame %0d bit %0d flipped", t, p));
      end else begin
        run(m, a ^ (32'h1 << $urandom_range(31)), r); chk(!r, "address bit flipped");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
