// tx_frame_catcher: testbench helper that recovers the OOK frames from one
// DAC channel. While idle it waits for a non-zero code (every frame begins
// with a 1 chip); it then samples the code in the middle of each of the
// 2432 bit periods (CPB clocks each) and stores the bits. `start_cyc`
// holds the clock count at which each frame began.
module tx_frame_catcher #(
  parameter int CPB = 25,
  parameter int FB  = 2432
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [13:0] dac
);
  bit     frames [$][$];
  longint start_cyc [$];
  longint cyc = 0;
  bit     cur [$];
  int     phase = 0;
  bit     active = 0;

  always @(posedge clk) if (!rst) begin
    cyc++;
    if (!active) begin
      if (dac != 0) begin active = 1; phase = 0; cur.delete(); start_cyc.push_back(cyc); end
    end
    if (active) begin
      if (phase % CPB == CPB / 2 && cur.size() < FB) cur.push_back(dac == 14'h3FFF);
      else if (phase % CPB == CPB / 2 + 1 && dac != 14'h3FFF && dac != 14'h0)
        $error("catcher: non-OOK code %h", dac);
      phase++;
      if (phase == FB * CPB) begin frames.push_back(cur); active = 0; end
    end
  end
endmodule
