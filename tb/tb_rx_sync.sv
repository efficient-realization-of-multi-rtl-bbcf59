// tb_rx_sync: a decimated OOK stream (4 samples per bit, levels lo/hi plus
// uniform noise) carrying frames of random bits - sync sequence - 2176
// random code bits, with random lead-in. Checks one detection per frame,
// that `skip` aligns the delayed stream to the first sample of code bit 0,
// and that s1/s0 equal the preamble sums computed by the testbench. Also
// checks that noise and random data alone cause no detection.
module tb_rx_sync;
  import tb_ref_pkg::*;
  localparam int SPB = 4, PW = 8;
  logic clk = 0, rst = 1;
  logic [14:0] x = 0; logic x_valid = 0;
  logic [23:0] thresh;
  logic det; logic [3:0] skip; logic [23:0] s1, s0; logic [14:0] x_del; logic x_del_valid;
  int checks = 0, failures = 0, ndet = 0;
  always #5 clk = ~clk;
  rx_sync dut (.*);
  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int xs[$];          // all samples sent
  int data_start[$];  // sample index of code bit 0 of each frame
  longint e1[$], e0[$];
  int nidx = 0;

  task automatic send_bit(input bit b, input int lo, input int hi, input int nz);
    for (int k = 0; k < SPB; k++) begin
      automatic int v = (b ? hi : lo) + int'($urandom_range(2*nz)) - nz;
      @(negedge clk); x = 15'(v); x_valid = 1; xs.push_back(v);
      @(negedge clk); x_valid = 0;
      @(negedge clk);          // 3 clocks per sample, like a decimated stream
      nidx++;
    end
  endtask

  task automatic send_frame(input int lo, input int hi, input int nz, input int lead);
    longint a1 = 0, a0 = 0;
    for (int i = 0; i < lead; i++) send_bit(1'($urandom), lo, hi, nz);
    for (int i = 0; i < 256; i++) begin
      automatic int base = nidx;
      send_bit(SYNC_REF[i], lo, hi, nz);
      for (int k = 0; k < SPB; k++) if (SYNC_REF[i]) a1 += xs[base+k]; else a0 += xs[base+k];
    end
    e1.push_back(a1); e0.push_back(a0);
    data_start.push_back(nidx);
    for (int i = 0; i < 2176; i++) send_bit(1'($urandom), lo, hi, nz);
  endtask

  // Track detections and the first sample the demodulator would use.
  int skip_left = -1, del_idx = 0, fr = 0;
  always @(posedge clk) if (!rst) begin
    if (x_del_valid) begin
      if (skip_left == 0) begin
        chk(del_idx == data_start[fr], $sformatf("frame %0d starts at %0d, expected %0d", fr, del_idx, data_start[fr]));
        chk(int'(x_del) == xs[del_idx], "x_del value");
        fr++;
        skip_left = -1;
      end else if (skip_left > 0) skip_left--;
      del_idx++;
    end
    if (det) begin
      ndet++;
      skip_left = int'(skip);
      chk(fr < e1.size() && longint'(s1) == e1[fr] && longint'(s0) == e0[fr], "preamble sums");
    end
  end

  initial begin
    thresh = 24'd200000;
    repeat (3) @(posedge clk); rst = 0;
    del_idx = -PW;
    // noise and random data, nothing to find
    for (int i = 0; i < 600; i++) send_bit(1'($urandom), 2000, 3000, 150);
    chk(ndet == 0, "no false detection");
    send_frame(2000, 3000, 150, 37);
    send_frame(2000, 2800, 100, 300);
    send_frame(2000, 4000, 200, 500);
    for (int i = 0; i < 50; i++) send_bit(1'b0, 2000, 3000, 50);
    chk(ndet == 3, $sformatf("%0d detections", ndet));
    chk(fr == 3, "three aligned frames");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
