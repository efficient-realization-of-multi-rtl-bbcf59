# Three-channel water-to-air visible light link with one shared LDPC decoder

Three LEDs under water each send their own data stream upward, through a
moving water surface, to three photodiodes (APDs) in the air. The waves
change each path's optical gain from one frame to the next, so every frame
has its own preamble. The receiver synchronizes and re-estimates the channel
on every frame, and LDPC decoding repairs the bit errors that remain.

An LDPC decoder is expensive on an FPGA. On the board this design targets,
one decoder core already takes about a quarter of the LUTs, so three would
not fit. The main idea is therefore to **time-share one decoder among the
three channels**:

- The transmitter staggers the three streams by 80 µs each, so that their
  frames reach the receiver at different times.
- The receiver parks each channel's soft bits (LLRs) in a frame buffer. A
  scheduler feeds the buffers to the one decoder core, one after the other.
- The decoded frames carry no channel tag. They are told apart afterwards by
  a 32-bit address inside each frame, and then checked with a CRC.

The SystemVerilog here covers all the digital logic of both FPGAs except the
LDPC encoder and decoder cores. Those are vendor IP; they connect through
ports of the top level.

## Link at a glance

| Quantity | Value |
|---|---|
| Channels | 3 |
| Host to transmitter | 3 UARTs, 8N1, 1 953 125 baud |
| Air rate | 5 Mbit/s OOK per channel |
| Receiver sampling | 100 MSPS, 12-bit ADC per channel |
| Transmit DAC | 14-bit per channel (drives the LED through a bias-T) |
| Stream stagger | 80 µs (400 bit times) between channels 0→1 and 1→2 |
| Frame on air | 256-bit sync sequence + 2176-bit LDPC codeword = 2432 bits |
| LDPC information block | 1280 bits = 32-bit address + 1224-bit payload (153 bytes) + 24-bit CRC |

Clocks:

- The receiver runs at 100 MHz, one clock per ADC sample.
- The transmitter runs at 125 MHz. This clock is this design's choice: it
  gives exactly 64 clocks per UART baud and 25 clocks per air bit.

## Frame format

```
 air order ->
 | sync (256 chips) | codeword (2176 bits)                                        |
                    | address (32) | payload (1224) | CRC-24 (24) | parity (896)   |
                    |<------------- 1280 information bits ------->|
```

- **Bit order.** All fields are sent MSB first. The payload bytes are sent
  in the order they arrived, each byte MSB first.
- **Sync sequence.** 255 chips of the maximal-length sequence of
  x⁸+x⁶+x⁵+x⁴+1 (seed 1), plus a trailing 0. The sequence is balanced:
  128 ones and 128 zeros.
- **Addresses.** Channel *k* uses address `32'hA5C3_0001 + k`.
- **CRC.** CRC-24A (polynomial 0x864CFB, initial value 0) over address and
  payload. Its check value for "123456789" is 0xCDE703.
- **Codeword layout.** The codeword is assumed systematic: the 1280
  information bits are sent first.

The frame length, the field sizes and the 256-bit sync are fixed by the
reference system. The sequence itself, the addresses and the CRC polynomial
are not; they are defined in `owc_pkg.sv` and can be changed there.

## Transmitter (`tx_fpga`)

Each channel is a chain of four blocks:

1. `uart_rx`: receives bytes from the host. After a framing error it waits
   for the line to go idle before it looks for the next start bit.
2. `fifo_sync`: the input FIFO, 512 bytes by default. When fewer than
   `RTS_MARGIN` places are left it deasserts the host's clear-to-send
   (`uart_rts_n` goes high). This stops the host from overrunning the FIFO
   while the link is slower than the host.
3. `tx_packetizer`: waits for 153 bytes, then sends address, payload and
   CRC bit-serially to the LDPC encoder. The encoder ports use valid/ready
   with a `last` flag.
4. `tx_framer`: writes the sync sequence and then the encoder's 2176 output
   bits into a one-bit-wide frame FIFO.

`ook_modulator` reads a whole frame out of the frame FIFO at one bit every
25 clocks. It drives the DAC with one of two codes: full scale for 1 and
zero for 0.

### Slot timing and stagger

A single `tx_slot_timer` keeps all three channels in step:

- Time is cut into **slots of 4000 bit times (800 µs)**. This is the
  2432-bit frame plus room for the stagger and a guard interval.
- Channel *k* may start a frame only at bit 400·*k* of a slot. That is the
  80 µs stagger.
- If a channel has no complete frame queued at its start point, it sends
  nothing for that slot and counts a guard slot.

With these numbers, channel 2's frame ends at bit 800 + 2432 = 3232. Every
channel is then silent for at least 768 bit times before the next slot.

- **From the reference system:** the 80 µs offset.
- **This design's choice:** the slot length, and the rule that frames start
  only at slot points. Both are parameters (`SLOT_BITS`, `STAGGER_BITS`).

## Receiver (`rx_fpga`)

Each channel runs this chain at 100 MHz:

```
ADC -> rx_downsample -> rx_sync -> rx_demod -> rx_llr_map -> llr_frame_buffer
                            \-> rx_chan_est --^
```

### Downsampling

`rx_downsample` sums groups of 5 ADC samples. That leaves 20 MSPS, i.e.
**4 samples per bit**. The sum is a boxcar filter: it also lowers the noise.

### Synchronization: a DC-free correlator

`rx_sync` keeps the last 1024 samples. For every incoming sample it forms
two sums over the 256 positions that line up with the sync chips:

- S1, the sum over the positions of the 1-chips;
- S0, the sum over the positions of the 0-chips.

Each term is a bit sum of 4 samples. Because the sequence has as many ones
as zeros, S1 − S0 does not depend on ambient light or on the LED's DC bias.
Its size is proportional to the channel gain.

The search works in three steps:

1. S1 − S0 crosses the threshold input `sync_thresh`.
2. The block takes the largest value over the next 8 samples. This places
   the frame to within one sample, not just one bit.
3. At the peak it pulses `det` and reports how many samples to skip to
   reach codeword bit 0. It then holds off for one codeword length.

Two things to know about `sync_thresh`:

- **It is absolute.** Set it to about half the value of S1 − S0 expected at
  the weakest gain. The testbenches use 2 000 000 with a 12-bit ADC.
- **It is not normalised to signal power.** A sudden large step in the
  ambient level, inside one 256-bit window, can look like a correlation peak.
  This design assumes the ambient level changes slowly.

### Channel estimation and LLRs

The same two sums give the on and off light levels of this frame.
`rx_chan_est` computes:

```
mid   = (S1 + S0) / 256          decision midpoint of one bit sum
amp   = (S1 - S0) / 128          on-minus-off level of one bit sum
shift = max(0, msb(amp) - 6)     scaling so that +-amp/2 lands near +-32..63
```

`rx_demod` integrates over each bit and dumps the 4-sample sum y. It does
this for 2176 bits.

`rx_llr_map` then outputs:

```
LLR = saturate_8bit((mid - y) >>> shift)
```

A positive LLR means bit 0 (light off). The LLRs are scaled, not
noise-weighted. That is enough for a min-sum decoder, whose decisions do not
change when all LLRs are multiplied by one factor.

The reference system only names the synchronization, estimation and LLR
stages. Their insides here are this design's own.

### Sharing the decoder: buffers and scheduler

This is the part that lets one decoder serve three channels.

**`llr_frame_buffer`**

- Each channel has one, holding 2176 × 8-bit LLRs.
- It is written as the frame is demodulated.
- When the last LLR is in, `full` rises. It stays high until the scheduler
  releases the buffer.
- If a new frame starts while the buffer is still full, that frame is
  dropped whole. `overflow` pulses and the `dropped` counter of that
  channel increments.

**`ldpc_dec_scheduler`**

- It watches the three `full` flags.
- When the decoder is free, it takes the next full buffer in round-robin
  order, starting after the channel it served last.
- It streams that buffer into the decoder with valid/ready, one LLR per
  accepted beat, and marks the 2176th with `last`.
- It releases the buffer in the same clock as the last handshake, so the
  next choice never picks the buffer just read.
- `sched_waits` counts frames that found another channel's frame being
  decoded.

Why one buffer per channel is enough:

- A frame takes 2432 × 200 ns ≈ 486 µs on air.
- Its LLRs stream into the decoder in 2176 clocks (21.8 µs at 100 MHz) if
  the decoder never stalls.
- With the 80 µs stagger, the three buffers normally fill one after another
  and never collide.
- Without the stagger, all three fill in the same clock. The scheduler then
  serialises them, and the decoder must finish each frame within one slot.

The decoder gets no channel number.

**`rx_stream_separator`**

- It takes the decoded bits, reads the 32-bit address at the head of each
  frame and routes the frame to that channel's `crc24_checker`.
- It also outputs the payload with its channel number (`pl_*` ports).
- A frame whose address matches no channel is counted in `addr_misses` and
  discarded.

**`fer_stats`**

Each channel has these 32-bit counters:

| Counter | What it counts |
|---|---|
| `rx_frames` | frames detected by the synchronizer |
| `ok_frames` | frames that passed the CRC |
| `crc_err` | frames that failed the CRC |
| `dropped` | frames lost to a full buffer |

The frame error rate is `1 - ok_frames / frames_sent`. It is read against
the transmitter's `frames_sent` counters.

## Top level (`owc_system_top`)

The top joins `tx_fpga` (`tx_clk`, `tx_rst`) and `rx_fpga` (`rx_clk`,
`rx_rst`). The two halves share no signal. In the real system they are two
boards linked only by light.

Everything outside the FPGAs is a port:

| Ports | What connects there |
|---|---|
| `uart_rxd`, `uart_rts_n` | host / USB-to-TTL adapters |
| `enc_i_*`, `enc_o_*` | the three LDPC encoder cores |
| `dac_code` | DACs (then bias-T, LEDs) |
| `adc` | ADCs (behind APDs and amplifiers) |
| `dec_s_*`, `dec_m_*` | the shared LDPC decoder core |
| `sync_thresh`, `stats_clear` | control |
| `pl_*`, `crc_*`, counters | results |

The only top parameter is `N_CH` (3). The block parameters keep the
defaults given above.

Resets are synchronous and active high. The UART lines idle high.

## Departures from the reference system, and limits

- **LDPC code.** The encoder and decoder cores are external IP and are not
  included. The code's parity-check matrix is not given, so the testbenches
  use stand-in models:
  - a systematic (2176, 1280) "code" whose parity bits are
    p[j] = u[j] ^ u[j+896];
  - a hard-decision "decoder" with a fixed latency of 1000 clocks.
  The stand-ins only exercise the ports; they correct nothing. The real
  cores must use the same bit-serial ports and deliver the information
  bits first.
- **Clock and timing choices.** The following are this design's choices:
  the 125 MHz transmit clock, the 800 µs slot (4000 bit times) with a guard
  interval, frame starts only at slot points, and the UART flow control
  through RTS.
- **Constants.** The sync sequence, the channel addresses and the CRC
  polynomial are this design's choices.
- **Receiver internals.** The synchronizer, channel estimator, LLR mapping
  and buffer sizes are this design's own. In the reference system these
  stages are only named.
- **Where the channel estimate comes from.** The reference block diagram
  takes the channel estimate after demodulation. Here it is taken from the
  sync preamble's correlation sums. Those sums are already at hand at the
  synchronization peak, and they give the levels before the first codeword
  bit.
- **Sync threshold.** The threshold is absolute. A fast step in ambient
  light can cause a false detection (see above).
- **Analog parts are not modelled.** The bias-T, LEDs, APDs and amplifiers
  are left out. The DAC and ADC are ports.
- **No decoder-side test run.** No real LDPC decoding has been simulated.
  The frame error rates of the reference system come from its optical
  channel and its decoder, so they cannot be reproduced with this RTL
  alone.

## Simulating

Each block has a self-checking testbench `tb/tb_<module>.sv`. It prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog.

`tb/tb_owc_system_top.sv` runs the whole link at the default sizes:

- 3 channels;
- 4 frames per channel from three UART hosts;
- encoder and decoder models;
- a channel model with different gains per path, slow gain swings, noise,
  and injected bit errors.

It checks the payload and counters and counts each mechanism: RTS pauses,
guard slots, staggered starts, decoder sharing, address misses and CRC
failures. It finishes in about 10 s.

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_owc_system_top \
    -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/owc_pkg.sv tb/tb_ref_pkg.sv tb/tb_owc_system_top.sv
./obj_dir/Vtb_owc_system_top
```

Replace `tb_owc_system_top` with any other testbench name to test one
block.

Useful knobs:

| Parameter | Where | Meaning |
|---|---|---|
| `N_CH` | top, `tx_fpga`, `rx_fpga` | number of channels |
| `SLOT_BITS`, `STAGGER_BITS` | `tx_fpga` / `tx_slot_timer` | slot length and stagger in bit times |
| `IN_DEPTH`, `RTS_MARGIN` | `tx_fpga` | input FIFO size and flow-control margin |
| `RX_DS`, `RX_SPB` | `owc_pkg` | downsampling factor and samples per bit |
| `LLR_W` | `owc_pkg` | LLR width |

`tb/owc_channel_model.sv` is the place to try other channel conditions. It
sets the gains, the gain swing, the noise, the ambient level and the bit
flips.
