# FPGA firmware for a pulse-actuated MTJ true random number generator

A perpendicular magnetic tunnel junction (MTJ) can act as a coin. Reset it
into its antiparallel (AP, high-resistance) state. Then hit it with a short
write pulse whose amplitude is tuned so the junction flips to the parallel
(P, low-resistance) state about half the time. Reading the state afterwards
gives one true random bit: P = 1, AP = 0. The bit is random because thermal
fluctuation decides whether the pulse switches the junction.

This RTL is the FPGA side of such a generator. It runs the pulse cycle
(reset, verify, write, measure) once every 43 ticks of a 468.75 MHz sample
clock, which is 10.9 million bits per second. It reads the junction current
at the right moment of each cycle, packs the bits, and streams them to a host
computer as UDP datagrams over 10 Gb/s Ethernet.

The analog parts sit on a daughter board outside the FPGA:

- an 8-channel DAC that sets eight constant voltages;
- inverting stages that make four of those voltages negative;
- eight analog switches, one per channel;
- a summing amplifier that drives the junction;
- a transimpedance amplifier that turns the junction current into a voltage.

The FPGA never produces an analog level itself. It only opens and closes the
eight switches, so the shape of each pulse comes entirely from which channels
are switched in and when.

## Block diagram

```
              +------------------- clk_smp (468.75 MHz) -------------------+   +---- clk_eth ----+
 pulse_cfg -->| pulse_sequencer --sw_en[7:0]--------------------------------------> analog switches
              |        | verify_strobe, measure_strobe                       |   |                 |
 mtj_in ----->| state_sampler --bit--> bit_packer --64-bit word--> bit_queue ====> udp_framer ------> tx_* (10G MAC)
              |        | reset_err_count      | bit_count      | dropped   |   |  | frames_sent    |
              +------------------------------------------------------------+   +-----------------+
```

| module            | role |
|-------------------|------|
| `mtj_trng_pkg`    | shared types (`pulse_cfg_t`, `net_cfg_t`, `status_t`, `phase_e`) and default settings |
| `pulse_sequencer` | tick counter and phase decoder. Drives the switch enables and the two sample strobes. |
| `state_sampler`   | synchroniser for the comparator input. Captures the random bit and counts reset errors. |
| `bit_packer`      | serial-to-64-bit packing. Counts the bits. |
| `bit_queue`       | dual-clock FIFO (Gray-code pointers), 512 x 64 bits. Drops words when full. |
| `udp_framer`      | Ethernet II / IPv4 / UDP framing onto a 64-bit AXI4-Stream-style MAC interface |
| `mtj_trng_top`    | wires the five blocks together |

## The pulse cycle

One random bit takes one cycle of `pulse_cfg.period` ticks (default 43). The
cycle is divided into four windows, in this order:

| phase   | purpose | default ticks | default switch | polarity |
|---------|---------|---------------|----------------|----------|
| reset   | large pulse that forces AP | 0-6 | channel 1 | positive |
| verify  | small read pulse; the junction must read AP | 9-14 | channel 2 | positive |
| write   | short stochastic pulse; flips AP to P with probability about 1/2 | 17-21 | channel 5 | negative |
| measure | small read pulse; the state read here is the random bit | 25-30 | channel 3 | positive |

Ticks 31-42 are idle, with all switches open (0 V on the junction).

Each window is a `window_t` of `{start, len, sw_mask}`. `sw_mask` selects the
switches closed during the window, with bit *i* = DAC channel *i*+1. Several
bits may be set, and the summing amplifier then adds those channels. If two
windows overlap, the earlier phase in the list wins. A window with `len` = 0 is
unused. All timing is set at run time through the `pulse_cfg` input, so a
different cycle needs no new bitstream.

The pulse amplitudes are not set here. They are the DAC voltages, which have
to be tuned on the bench:

- the reset amplitude so that verify never sees P;
- the write amplitude so that P is close to 50 %;
- both read amplitudes high enough to tell the two states apart, but low
  enough not to disturb them.

### Where the samples are taken

This is the subtle part of the timing. The sequencer registers all its
outputs, so `sw_en` shows the mask of tick *t* one clock after the counter
was at *t*. The strobes are registered the same way. `verify_strobe` is high
for one clock at verify start + `verify_ofs`, and `measure_strobe` likewise
at measure start + `measure_ofs`.

When a strobe is high, the sampler captures its synchronised input. Because
the input passes a 2-flop synchroniser, that value is what `mtj_in` was two
clocks earlier. So a sample taken at offset *k* sees the junction as it was
about *k* − 2 clocks into the window, minus whatever delay the analog path
adds.

The default offset of 4, in 6-tick read windows, leaves room for one or two
clocks (2–4 ns) of amplifier delay. With a different board, choose the offset
so that the sample lands on the flat top of the read pulse. An assertion
checks that each offset lies inside its window.

### Reset errors

The verify sample should always read AP (0). If it reads P, the reset pulse
failed. `state_sampler` then pulses `reset_err` and increments the saturating
`status.reset_errors` counter. The random bit of that cycle is still emitted,
because the error is only counted. With a correctly tuned reset amplitude the
counter stays at zero. A non-zero count means the reset amplitude is too low.

## Reading the junction

`mtj_in` is taken to be a 1-bit signal. It is high when the junction carries
the large current of the P state during a read pulse. In other words, the
transimpedance amplifier output is thresholded by the FPGA input buffer or by
a comparator on the board.

The signal is asynchronous to `clk_smp`, so it passes a 2-flop synchroniser
(`SYNC_STAGES`). Outside the read windows the level means nothing and is
ignored. During reset it is high whatever the state.

## Bit order, words and frames

`bit_packer` places the *i*-th bit of a word (0 = oldest) in byte *i*/8, at
bit 7 − *i*%8. A 64-bit word therefore holds eight bytes in arrival order,
each written MSB-first.

`udp_framer` sends byte *n* of a frame on bits `[8(n%8)+7 : 8(n%8)]` of word
*n*/8, the usual little-endian lane order of 64-bit Ethernet MAC streams. As a
result, a host that reads the UDP payload as a byte string, MSB first, gets
the bits in the order they were generated.

Each frame has a 42-byte header followed by `PAYLOAD_WORDS` × 8 bytes of bits
(1024 bytes by default):

| bytes | field |
|-------|-------|
| 0-5 / 6-11 | destination / source MAC (`net_cfg`) |
| 12-13 | EtherType 0x0800 |
| 14-33 | IPv4 header. Version 4, IHL 5. Total length 28 + payload. Identification = frame number mod 65536. Don't fragment, TTL 64, protocol 17. The header checksum is computed in hardware. |
| 34-41 | UDP source/destination port (`net_cfg`), length 8 + payload, checksum 0 (unused, allowed in IPv4) |

The MAC adds the preamble and the FCS.

The header is 42 bytes, not a multiple of 8, so from word 5 onward every
output word combines two parts:

- the last two bytes of the previous payload word, held in a carry register;
- the first six bytes of the next payload word.

The final word of a frame holds only the two left-over bytes
(`tx_tkeep = 8'h03`). A frame is `PAYLOAD_WORDS` + 6 words long.

The framer starts a frame only when the queue already holds a whole payload.
Because of that, `tx_tvalid` stays high from the first word to `tx_tlast`, as
10G MACs require. An assertion checks that a stalled word does not change.

## The queue and the two clocks

The sample clock (468.75 MHz) and the MAC user clock are separate domains.
The MAC clock is taken to be 156.25 MHz for a 64-bit 10GBASE-R interface, and
468.75 MHz happens to be exactly three times that, but the design does not
rely on any phase relation between the two.

`bit_queue` is a standard asynchronous FIFO:

- binary and Gray-coded pointers, ADDR_W + 1 bits wide;
- each Gray pointer crosses to the other clock through two flops;
- first-word-fall-through reads;
- `rd_count`, the fill level as seen from the read side, which the framer
  uses to wait for a full payload. It can only lag, never overstate.

The generator is never stalled, so the timing of the pulse cycle does not
depend on the network. If the MAC holds off long enough to fill the 512-word
(32 kbit, about 3 ms) queue, new words are dropped and counted in
`status.dropped_words`. The host can also spot a gap from the IPv4
identification.

The generated bit rate is 10.9 Mb/s. With framing overhead that uses about
0.12 % of a 10 Gb/s link, so the queue only matters when the MAC stalls.

## Interface of `mtj_trng_top`

| port | dir | width | clock | meaning |
|------|-----|-------|-------|---------|
| `clk_smp`, `rst_smp_n` | in | 1 | - | sample clock, synchronous active-low reset |
| `clk_eth`, `rst_eth_n` | in | 1 | - | MAC user clock, synchronous active-low reset |
| `enable` | in | 1 | smp | run the pulse cycle. When low, the counter is held at 0 and all switches are open. |
| `pulse_cfg` | in | `pulse_cfg_t` | smp | period, four windows, two sample offsets. Keep static while enabled. |
| `net_cfg` | in | `net_cfg_t` | eth | MAC and IP addresses, UDP ports |
| `sw_en` | out | 8 | smp | analog switch enables, bit *i* = channel *i*+1 |
| `mtj_in` | in | 1 | async | thresholded amplifier output, 1 = P |
| `tx_tdata/tkeep/tvalid/tlast`, `tx_tready` | out/in | 64/8/1/1/1 | eth | frame stream to the MAC |
| `status` | out | `status_t` | mixed | `bit_count` (48 bits), `reset_errors`, `dropped_words` are in the smp domain. `frames_sent` is in the eth domain. |

Parameters: `Q_ADDR_W` (queue depth 2^Q_ADDR_W words, default 9) and
`PAYLOAD_WORDS` (default 128). `PAYLOAD_WORDS` must not exceed the queue
depth.

Defaults for both configuration inputs are in the package, as
`DEFAULT_PULSE_CFG` and `DEFAULT_NET_CFG`.

## What follows the published setup and what is this design's own

Taken from the published setup:

- the reset / verify / write / measure cycle and its purpose;
- eight DAC channels switched by the FPGA into a summing amplifier, four of
  them inverted;
- the 468.75 MHz sampling;
- one sample per cycle, taken during the measure pulse;
- P = 1, AP = 0;
- the ~10.9 MHz cycle rate (43 ticks);
- the queue, and transport to a PC over 10 Gb/s Ethernet using UDP.

The published rate appears both as 10.9 MHz and as 10.8 MHz. 43 ticks gives
10.90 MHz. A 10.8 MHz cycle is not a whole number of ticks: the nearest
settings are 43 ticks (10.90 MHz) and 44 ticks (10.65 MHz).

Choices made here, with no published counterpart:

- the window positions and lengths;
- which channel each phase uses (channels 5-8 taken as the negative ones);
- the sample offsets;
- the run-time configuration inputs;
- the 1-bit thresholded input and its synchroniser;
- keeping, rather than discarding, the bit of a cycle whose verify failed;
- the 64-bit word and the bit order;
- the FIFO depth, the clock crossing and the drop-on-full policy;
- the whole frame format (addresses, payload size, identification use, no
  UDP checksum);
- the MAC handshake;
- all counter widths.

Not included:

- The DAC and its programming interface.
- The analog board itself.
- The Ethernet MAC/PHY, which is vendor IP.
- Debiasing. The published run XORs the first half of the recorded stream
  with the second half in software on the host; real-time XOR in the FPGA is
  mentioned only as a possible extension.
- Statistical self-tests (for example NIST tests). These are likewise only
  mentioned as future work.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_pulse_sequencer` | Switch mask, phase and strobes on every tick for the default 43-tick cycle and for a second configuration. Cycle length (the bit rate). Switch-on time per phase. Idle behaviour while disabled. |
| `tb_state_sampler` | Random input and strobes against a testbench history. Synchroniser delay, polarity and the reset-error count. |
| `tb_bit_packer` | Random bits and gaps. Word contents, bit order, word timing and `bit_count`. |
| `tb_bit_queue` | 468.75 / 156.25 MHz clocks. Order and integrity. Overflow with the drop count. `rd_count` never overstating. Drain to empty. |
| `tb_udp_framer` | Every header field, including the IPv4 checksum (it must sum to 0xFFFF). Payload order. `tkeep`/`tlast`. Continuous `tvalid` under random MAC back-pressure. |
| `tb_mtj_trng_top` | End to end with small sizes (16-word queue, 64-byte payload). See below. |
| `tb_mtj_trng_top_full` | The same test with the top at its default parameters: two frames, a stall that overflows the 512-word queue, then more frames. It runs in seconds. |
| `tb_workload_bias` | The published long run, shortened to 2 × 40960 bits at default sizes. The junction drifts from P = 0.527 to P = 0.4985 half way, as measured in the published run. Acting as the host, the test bins the payload bits, checks each half's bias and the bias of the XOR of the two halves (within 4σ), and checks that no reset error is counted. |

The two top-level tests use `mtj_board_model`, a behavioural model for
testbenches only. It sums the selected channel voltages and keeps a two-state
junction (1 kΩ P / 2 kΩ AP). The junction flips to P at the end of a write
pulse with probability 1/2. With a small probability it ignores a reset.
Its current is thresholded into `mtj_in` one clock later.

The test records the true outcome of every write pulse in the model, packs it
with the documented bit order, and requires each received payload word to be
the next generated word. The only exception is words the queue reports as
dropped. It also checks:

- one bit per 43 ticks;
- the reset-error count equals the model's failed resets;
- the frame count;
- that every mechanism happened: bits 0 and 1, reset errors, MAC stalls,
  queue overflow and frames.

To run a testbench with plain Verilator, from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -y rtl -y tb +libext+.sv \
    rtl/mtj_trng_pkg.sv tb/tb_mtj_trng_top.sv --top-module tb_mtj_trng_top
./obj_dir/Vtb_mtj_trng_top
```

Replace the top-module name to run any other testbench. The RTL files carry
no `` `timescale``, hence the `--timescale` option. Lint a module with
`verilator --lint-only -Wall -y rtl +libext+.sv rtl/mtj_trng_pkg.sv rtl/<module>.sv`.

## Limits

- The data path is exact to the bit, but the analog behaviour is only as good
  as `mtj_board_model`. The default windows and offsets have not been checked
  against real pulse shapes. On hardware they need to be set from a scope
  trace, for ringing and amplifier delay.
- `pulse_cfg` is meant to be static while `enable` is high. If it changes
  mid-cycle, one cycle gets a mix of old and new windows.
- The status counters belong to two clock domains. Read `frames_sent` from
  `clk_eth` and the others from `clk_smp`, or re-synchronise them.
- Bits of cycles that failed verify are emitted as normal bits. A host that
  wants to discard them cannot tell which ones they are; it only has the
  count.
