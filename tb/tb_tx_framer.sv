// tb_tx_framer: drives codewords with random valid gaps and a FIFO-level
// model; checks that each frame written is the 256-bit sync sequence
// followed by the codeword, that frame_done pulses once per frame, and that
// no frame starts while the FIFO lacks room for 2432 bits.
module tb_tx_framer;
  import tb_ref_pkg::*;
  localparam int D = 4096;
  logic clk = 0, rst = 1;
  logic cw_valid = 0, cw_data = 0, cw_last = 0, cw_ready;
  logic ff_wr, ff_data, frame_done;
  logic [12:0] ff_count = 0;
  int checks = 0, failures = 0, ndone = 0;
  bit wr[$];
  always #5 clk = ~clk;

  tx_framer dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (!rst) begin
    if (ff_wr) wr.push_back(ff_data);
    if (frame_done) ndone++;
  end

  initial begin
    bit cw[$];
    repeat (3) @(posedge clk); rst = 0;
    ff_count = 13'(D - 2432 + 1);        // one bit short of room
    repeat (40) @(posedge clk);
    chk(wr.size() == 0, "waits for room");
    ff_count = 13'(D - 2432);
    for (int f = 0; f < 3; f++) begin
      wr.delete();
      cw.delete();
      for (int i = 0; i < 2176; i++) cw.push_back(1'($urandom));
      for (int i = 0; i < 2176; ) begin
        @(negedge clk);
        cw_valid = $urandom_range(2) != 0;
        cw_data  = cw[i];
        cw_last  = (i == 2175);
        @(posedge clk);
        if (cw_valid && cw_ready) i++;
      end
      @(negedge clk); cw_valid = 0; cw_last = 0;
      @(posedge clk); @(posedge clk);
      chk(ndone == f + 1, "frame_done count");
      chk(wr.size() == 2432, $sformatf("frame length %0d", wr.size()));
      for (int i = 0; i < 256; i++) if (wr[i] != SYNC_REF[i]) begin chk(0, $sformatf("sync chip %0d", i)); break; end
      for (int i = 0; i < 2176; i++) if (wr[256+i] != cw[i]) begin chk(0, $sformatf("code bit %0d", i)); break; end
      checks += 2;
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
