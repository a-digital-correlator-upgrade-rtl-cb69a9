# An FX correlator node for a 10-antenna interferometer

This is synthesizable SystemVerilog for one board of a packetised FX correlator. The correlator serves a
small radio interferometer of 8 to 10 dishes. Each dish delivers two 2.5 GHz wide IF bands. The bands are
digitised at 5 Gsample/s with 8 bits and arrive at the FPGA as 16 samples per 312.5 MHz clock.

Every board does two jobs:

- **F-engine (×2, one per band).** It channelises its antenna's band into 2048 frequency channels and
  reduces each sample to 4+4 bits. It then cuts the stream into packets of 1024 consecutive samples of one
  channel.
- **X-engine (×1).** It receives, from every antenna, the packets for the channels this board owns. It
  forms all antenna-pair products and integrates them. The visibilities go out on a 1 Gb Ethernet stream.

The boards exchange packets through a 10 GbE switch. Channel *c* is correlated by node *c* mod N_NODES.
A board's packets for its own node never touch Ethernet and take an internal path.

The top level is `roach2_node` (`rtl/roach2_node.sv`). Its parameter defaults describe the 10-node
Small Array:

| quantity | default |
|---|---|
| FFT size | 4096 |
| samples per clock | 16 |
| PFB taps | 4 |
| samples per packet | 1024 |
| nodes / antennas | 10 / 10 |
| channels used | 2040 per band (204 per band per node) |
| QDR address width | 20 (72 Mb part, 64-bit words) |

## Data path of one band

```
ADC 16x8b -> phase demod (Walsh +/-1) -> coarse delay (0..16383 samples)
          -> 4-tap PFB FIR -> 4096-point real FFT -> 8 channels x (18b+18b) per clock
          -> { autocorrelation with noise-diode demodulation }
          -> complex gain + round to 4+4 bit [-7,7] -> corner turn through QDR
          -> packetiser: 8-byte header + 1024 samples, routed by channel
```

### Walsh switching (`walsh_gen`, `phase_demod`)

Each band has two Walsh generators. Each holds a runtime-loaded 64-entry bit pattern and steps to the
next entry every `walsh_step` clocks, once the PPS start has fired.

- The **phase** pattern drives a GPIO to the front-end phase switch. A copy of it, delayed by the
  programmable amount `phase_dly` to match the round trip through the analogue chain, flips the sign of
  the samples (`phase_demod`).
- The **noise** pattern drives the noise-diode GPIO. The autocorrelator uses its delayed copy.

Negating −128 saturates to +127.

### Coarse delay (`coarse_delay`)

The delay is d = 16·q + r samples. The whole-word part q comes from a circular word memory. The residue r
is a barrel shift across the current word and the previous one. A new delay is taken on `delay_load`.
Samples from before the stream began read as zero.

### Polyphase filterbank (`pfb_fir`, `fft_wideband`, `fft_sdf_stage`)

`pfb_fir` weights the current frame and the three before it by a 4×4096-tap Hamming-windowed sinc. The
coefficients are computed in SystemVerilog at elaboration, so no tables are stored in files.

The 4096-point FFT of 16 parallel real samples uses a four-step split, NFFT = PAR·M with M = 256:

1. Lane *p* holds samples n = 16m + p. Each lane runs an M-point radix-2 decimation-in-frequency FFT in
   single-path delay-feedback (SDF) form. This produces k1 in bit-reversed order, one per clock.
2. Lane *p* is multiplied by the twiddle W_4096^(p·k1).
3. A direct 16-point DFT across the lanes gives X[k1 + 256·q].

Only q < 8 is kept: the input is real, so the other half is redundant. Each clock therefore carries 8
channels {k1, k1+256, …, k1+1792} and the index `k1`. Everything downstream addresses a channel as
(k1, q).

Each SDF stage can halve its output under the runtime `shift_sched` mask. The DFT applies the shifts of the
top log2(16) stages. The total scaling is therefore 2^−popcount(shift_sched), and `ovf` flags any
saturation.

### Autocorrelation (`autocorr`)

For every channel, it accumulates |X|² and the same power signed by the noise-diode state (P_on − P_off).
Both use 64-bit sums over `acc_len` spectra. Both are dumped during the last spectrum of each accumulation.

### Requantisation (`requant`)

Each channel has a 16+16-bit complex gain in a coefficient RAM. The product X·g is formed with 35-bit
components. It is then shifted right by RQ_SHIFT = 20 with round-half-up and clamped to [−7, 7]. The
output is 4-bit real plus 4-bit imaginary per channel.

### Corner turn (`transpose`)

The FFT delivers spectra, but the X-engines need 1024 consecutive samples of one channel. The reorder
works in two steps:

1. An on-chip double buffer collects 8 spectra. Each 64-bit entry holds one channel's 8 samples (byte t =
   spectrum t).
2. While the next 8 spectra arrive, those 2048 words go to QDR at {window parity, channel, group}. One
   word per clock is written, which exactly matches the input rate.

While one half of the QDR fills, the other half is read back channel by channel, 128 words per channel.
The output starts about one window after the window's first spectrum. It is tagged with channel, word and
window number; the window number becomes the packet timestamp.

### Packetiser and routing (`f_packetiser`)

A packet is one channel of one window. It consists of an 8-byte header and 128 words (1 kB):

- header fields: 40-bit timestamp (the window count), 8-bit antenna id, 16-bit global channel
  (band·2048 + channel);
- the destination is node c mod N_NODES;
- channels ≥ CH_USED are dropped;
- packets for the board's own node go to the internal port;
- the others alternate between the band's two 10 GbE ports, by (c / N_NODES) mod 2.

Each port buffers PKT_BUF packets.

## X-engine

```
4 x SFP + internal -> packet decode -> circular buffers (per port, per antenna)
   -> release control (channel n released when n+2 arrives) -> multiplexor
   -> cross-multiplier (all pairs, 1024-sample window) -> vector accumulator in QDR
   -> visibility packetiser -> 8-bit 1GbE stream
```

### Input buffering and release (`x_packet_decode`, `x_input_buffer`)

Each input port decodes headers and checks that the channel belongs to this node; bad packets are counted.

The decoder maps a packet to a sequence number, seq = timestamp·LCH + lc, where lc = 2·(c / N_NODES) +
band. The two bands of one node are produced simultaneously, which is why they are interleaved in lc.
Payload words go into a per-port, per-antenna memory of SLOTS packet slots, indexed by seq mod SLOTS.

When every word of a packet has arrived, its antenna is marked present in that slot. Slot *n* is released
once any packet of sequence ≥ n+2 has completed. So the buffer waits for stragglers for about two packet
times, then moves on. Antennas that did not make it are read as zeros and flagged in `out_mask`. Packets
that arrive after their slot was released are counted in `late_pkts`.

The multiplexor then presents T_PAR samples of every antenna per clock. The default is 2, so one window of
one channel takes 512 clocks.

### Packed 4-bit cross-multiplication (`xeng`)

This block is the least obvious in the design. It forms one complex product a_i·conj(a_j) per 18×18
multiplier, using the offset trick:

- Shift each 4-bit component to unsigned, u = s + 8 (in hardware, flip the sign bit).
- Build A = (ur_i ≪ 9) + ui_i and B = (ui_j ≪ 9) + ur_j.
- The product A·B has three 9-bit fields:
  - bits 26:18 hold ur_i·ui_j;
  - bits 17:9 hold ur_i·ur_j + ui_i·ui_j;
  - bits 8:0 hold ui_i·ur_j.

  None of these fields can overflow into the next, since 15·15 + 15·15 < 512.

The fields are summed over the window, and the offsets are removed once per window. This uses per-antenna
sums SR, SI of the signed components and the sample count T:

```
Re = Σmid − 8(SR_i + SR_j + SI_i + SI_j) − 128·T
Im = Σ(bot − top) − 8(SI_i + SR_j − SR_i − SI_j)
```

At the end of a window the N(N+1)/2 results (autos included) are latched. They stream out as 2·NBL
signed 32-bit words in the order (0,0),(0,1)…(0,N−1),(1,1)…, re then im.

### Vector accumulator (`vacc`)

It adds each channel's vector to a sum in QDR at address lc·NW + word. An integration lasts `acc_len`
windows:

- in the first window the sum is overwritten;
- in the last window the sum is also sent on.

Read data returns QDR_LAT clocks later, so the incoming vector waits in a matching delay line.

Integrations start at the first window seen. A per-channel parity bit makes a channel that missed an
integration's first window start cleanly at its first appearance.

### Visibility packetiser (`x_packetiser`)

It sends one packet per channel per integration: an 8-byte header (window, node, global channel), then
the NW words most significant byte first, one byte per clock.

## Board top level and timing

`roach2_node` ties everything together:

- `pps_sync` starts all engines on the first PPS edge after `arm`, and counts later edges.
- The two bands' F-engines use SFP ports 0–1 and 2–3.
- `pkt_merge` joins the two internal packet streams into the X-engine's fifth input.

All of it runs on one clock.

Rates at the default size:

- **F side.** Exactly one window (262 144 clocks) per 1024 spectra, in every block.
- **X side.** Each node gets 408 channel packets per window, and each takes 512 clocks to multiply. That
  is 208 896 clocks, or 80 % of the window.
- **Large Array (8 nodes, all 2048 channels).** This would need 512·512 = 262 144 clocks plus release
  overhead per window. It does not fit with T_PAR = 2; set T_PAR = 4.

## Where this design departs from, or adds to, the published description

The published description gives the block diagram, the sample rates, the widths (8-bit ADC, 18-bit FFT,
16-bit gains, 35-bit products, 4+4-bit samples), the packet size, the transpose, and the n+2 release rule.
The following are this design's own choices:

- the FFT architecture;
- the filter window;
- the rounding points and the requantiser shift;
- the corner-turn method and the QDR address maps;
- all header layouts;
- the channel-to-node and port mapping;
- slot counts and FIFO depths;
- the packed-multiply field layout and its offset correction;
- the integration bookkeeping;
- the control ports, which stand in for a register bus.

The ADC and its LVDS capture, the Ethernet MACs and PHYs, the switch and the QDR chip are not described
at the logic level. The ports of `roach2_node` stop at their streaming interfaces. `tb/qdr_model.sv` is
a behavioural QDR with separate read and write ports and a 4-clock read latency.

## Verification

Each file in `tb/` is self-checking. Each prints `TB_RESULT checks=N failures=M` and has a watchdog.
Build one with, for example:

```
verilator --binary --timing -Irtl -Itb rtl/ami_pkg.sv rtl/xeng.sv tb/tb_xeng.sv --top tb_xeng
```

Add `rtl/fft_sdf_stage.sv`, `rtl/sync_fifo.sv` or `tb/qdr_model.sv` where a block needs them.
`tb_roach2_node` needs all of `rtl/` and `tb/qdr_model.sv`.

The unit testbenches run reduced sizes. Each compares against an independent model written in the
testbench:

- FFT: a direct DFT, at 64 points with 4 lanes;
- PFB: a direct FIR;
- xeng: signed complex products;
- autocorrelation, requantiser, corner turn, packetiser and accumulator: their defining sums.

`tb_roach2_node` is the end-to-end test. It runs two boards (node 0 and 1) with a 256-point FFT,
64-sample packets and all channels. The switch is modelled by cross-wiring the SFP ports. Both boards see
the same random ADC stream, so every visibility packet must have V(0,1) = V(0,0) = V(1,1) with zero
imaginary parts, exactly. The test checks this on every packet after the first two integrations; those
still hold uninitialised filter history.

It also counts each mechanism and fails if any never occurred:

- Walsh toggles;
- delay load;
- autocorrelation dumps and noise demodulation;
- requantiser saturation;
- internal and SFP packets;
- releases;
- visibility packets;
- the PPS start.

This reduced configuration has only two X-engines per channel, so the ADC is valid on every other clock
to keep the X-engines within their rate. The packet buffers are deeper than the defaults (parameters
`F_PKT_BUF`, `X_PKT_BUF`).

No test runs the top at its full default size. One integration there takes ~10^6 clocks per window on
two boards with 8 Mword memories, far beyond a practical simulation time. The full-size arithmetic is
covered by the rate budget above. The parameterised blocks are tested at smaller sizes of the same code.

Known limits:

- The filter's first three frames and the FFT's first frame contain undefined history.
- The last two channels before the stream stops are never released, by construction of the n+2 rule.
- The PFB coefficients are computed with real arithmetic at elaboration. This is fine for simulation and
  for FPGA synthesis tools that evaluate constant functions, but some open-source synthesis flows reject
  real constants.
