# MUXnet closed-loop BMI SoC: RTL

This is the digital part of a closed-loop brain-machine interface chip. The chip records
neural signals, classifies the sleep stage on chip with a small convolutional network, and
drives optogenetic LEDs according to the stage it finds. The network runs on **MUXnet**, a
neural processor with no multipliers and no lookup-table RAM. Each inner product of a few
low-precision weights with one bit of each activation is *selected* by a multiplexer. The
candidates come from a static table, a fixed set of constants that in silicon are tied to
VDD and GND. The weight memory stores only the index of a table line, so it costs n·m bits
per n weights. The table itself costs no memory.

Everything here is synthesizable SystemVerilog (IEEE 1800-2017). It lints cleanly apart
from unused-bit warnings, and the simulations need only plain `verilator`. Some parts of
the system are not written here. The chip's analog parts are the 8-channel low-noise
amplifier and the power management unit. The LED drivers are off chip, and so is the radio
used for wireless tests. In this design a host, whether a radio or a wired board, reaches
the chip through the SPI port.

## Signal path

```
 8 ADC channels ─► 8 × cic_filter ─► sample_loader ─► data_mem (input segment)
                   (÷2 … ÷32)        (ch 0,1)              │
                                                           ▼
 SPI host ─► spi_slave ─► registers / weight_mem ─► muxnet (controller + PE) ─► class 0-9
                                                           │
                            pwm_module ◄── early_stop_voter ◄┘
                            (2 LED channels)  (6 segments → 1 epoch)
```

1. Each channel is decimated by a first-order CIC filter to 8-bit samples.
2. Channels 0 and 1 are written into the input segment of the data memory, 500 samples per
   channel by default.
3. When a segment is full, the voter decides whether a classification is still needed. If it
   is, the MUXnet runs the four-layer network and reports a class.
4. Six segment classes form one epoch (six 5-s segments make one 30-s epoch), and the voter
   turns them into one stage decision. A class that reaches its own threshold decides the
   epoch early, and the remaining classifications of that epoch are skipped.
5. Each decision arms or disarms each of the two PWM channels, according to that channel's
   class mask.

## The static table and the two-stage MPU

This is the heart of the design, and it is the part to read closely.

### Static table (ST)

The table is built for n = 2 weights per line and m = 5 bits per value. A line is addressed
by a 10-bit index `{w_a[4:0], w_b[4:0]}`, which packs two two's-complement weights. It holds
one 5-bit value for each 2-bit activation key `{x_a, x_b}`:

| key | 00 | 01 | 10 | 11 |
|-----|----|----|----|----|
| value | 0 | w_b | w_a | sat5(w_a + w_b) |

For example, w = (3, 2) gives the line 00000 00010 00011 00101. The table has 1024 lines.
The key-11 entry saturates to [-16, 15], so a weight pair is exact when its sum fits in 5
bits. `muxnet_pkg::st_value` defines the table, and `stage1_mpu` builds it as 1024 constant
lines. A synthesis tool reduces it to the same constant multiplexer that the chip wires to
the supply rails.

### Stage 1: choose the lines

A 40-bit weight word carries four line indices, in bits [9:0], [19:10], [29:20] and [39:30].
Four stage-1 multiplexers select the four lines. This is the only place where weights are
read.

### Stage 2: look up each activation bit

Activations are signed 8-bit values. For weight pair p with activations (x_a, x_b), eight
4:1 multiplexers work in parallel, one per bit plane k. Each picks `line_p[{x_a[k], x_b[k]}]`,
which is the exact inner product of the pair with bit k of both activations. Four pairs times
eight planes make 32 multiplexers per cycle.

### PLMU and adder tree

The post-lookup merging unit (PLMU) of each pair forms Σ_{k<7} y[k]·2^k − y[7]·2^7. The top
plane is subtracted because the activations are two's complement, and the result fits in
13 bits. An adder tree then sums the four pairs into a 20-bit result.

### Two modes

| mode | weights per word | line use | result per cycle |
|------|------------------|----------|------------------|
| m = 5 (`mode10=0`) | 8 × 5-bit | line p ↔ (x[2p], x[2p+1]) | 8-element inner product |
| m = 10 (`mode10=1`) | 4 × 10-bit | lines 0/1 = high/low halves of (x0,x1), lines 2/3 of (x2,x3) | 4-element inner product |

In m = 10 mode each weight is split offline into W = 32·W_h + W_l, with W_h and W_l both in
[-16, 15]. The same 5-bit table then serves both halves, and the PE forms
y = 32·(high-half results) + (low-half results). This is the table decomposition: one m = 10
table would need 2^20 lines, and two m = 5 lookups replace it. The convolutions use m = 10
and the linear layers use m = 5.

Weights must be mapped offline to table indices, and the paper's pre-scaled weight scaling
also happens offline: real weights are multiplied by 2^s before quantisation. The hardware
undoes this scaling with a per-layer arithmetic right shift s of the accumulator.

## Network program and controller

`muxnet_ctrl` runs a program of four layer descriptors (`layer_cfg_t` in `muxnet_pkg`). By
default the program is the sleep-staging network:

| layer | kind | shape | weights | kernel / stride | words |
|-------|------|-------|---------|-----------------|-------|
| 0 | conv + ReLU | (2,500) → (2,249) | m = 10 | 4 / 2 | 4 |
| 1 | conv + ReLU | (2,249) → (2,246) | m = 10 | 4 / 1 | 4 |
| 2 | linear + ReLU | 492 → 32 | m = 5 | — | 1984 |
| 3 | linear | 32 → 5 | m = 5 | — | 20 |

Batch normalisation is assumed folded into the convolution weights offline, and no bias is
applied. Kernel 4 and strides 2 and 1 are inferred from the printed shapes. The weights
need 2012 of the 2048 words.

### Data layout

Tensors are stored byte-addressed and channel-major: element (c, t) is at
`base + c·len + t`. A linear layer is treated as a convolution with one input channel, a
kernel as long as its input, and one output position. This makes the flattened output of
layer 1 the input vector of layer 2, with no copying.

The default bases give each layer's output its own memory bank:

| bank | words | bytes | holds |
|------|-------|-------|-------|
| 0 | 0-127 | 0-1023 | input segment (always on) |
| 1 | 128-223 | 1024-1791 | conv 1 output |
| 2 | 224-319 | 1792-2559 | conv 2 output |
| 3 | 320-415 | 2560-3327 | linear 1 output |
| 4 | 416-511 | 3328-4095 | linear 2 output |

### Schedule

Each output value is computed from E = cin·k elements, in chunks of P (4 in m = 10 mode, 8 in
m = 5 mode):

- **Gather, P+1 cycles.** One activation byte is read per cycle. The weight word
  `w_base + o·⌈E/P⌉ + chunk` is read in the first cycle. Elements beyond E are zero.
- **Compute, 1 cycle.** The accumulator adds the PE result.
- **Write, 1 cycle.** The output is `acc >>>` shift, optionally passed through ReLU,
  saturated to int8 and stored at the next output address.

The last layer keeps the argmax of its accumulators. The first maximum wins.

One classification takes
Σ_layers [1 + outputs·(⌈E/P⌉·(P+2) + 1)] cycles, which is 32,951 cycles for the default
network (pred_valid follows one cycle later). That is 1.43 ms at 23 MHz. The gather is
byte-serial to keep the controller simple. A wider gather would shorten this time without
changing the PE.

### Power gating

`pg_ctrl` powers bank 0 always. While the network runs, it also powers the banks that the
current layer reads or writes; while idle, only bank 0 is on (register bit `CTRL[1]` forces
all banks on). A bank that is switched off loses its contents: the model clears a per-word
valid bit, and an invalid word reads as zero. With the default map, each layer keeps two or
three of the five banks on. Over one default classification that is 56 % of the
bank-cycles (2 of 5 banks for the 6,475 cycles of layer 0, 3 of 5 for the other 26,476).
Between classifications, which is most of each 5-s segment, it is 1 of 5. How this maps to
power depends on the memory macros and is not modelled. The weight memory is never gated.

## Voting, stimulation, acquisition

- **early_stop_voter.** Epochs have SEGS = 6 segments. `thr[c]` (3 bits, 0 = off) is the vote
  count at which class c wins at once. Otherwise the majority of six wins, and a tie goes to
  the lowest class. Once an epoch is decided, `run_nn` stays low for the rest of it, and
  `skipped` counts the saved classifications.
- **pwm_module.** Two channels, each with a 27-bit period and high time in clock cycles.
  Period and high time are free, so any frequency and duty are possible. At 23 MHz, 0.25 Hz
  to 32 kHz is 92,000,000 to 719 cycles, and the in-vivo setting of 10 Hz at 10 % is period
  2,300,000 and high time 230,000. A channel is armed on a decision that lies in its 10-bit
  class mask, and disarmed by any other decision.
- **cic_filter.** First order, with rate R = 2^`log2_rate` from 2 to 32. The output is the mean
  of R samples, cut to the top 8 of the 10 input bits. The filter is exact with wrap-around
  arithmetic.
- **sample_loader.** Writes each pair of samples from channels 0 and 1 into the input segment,
  waiting for the memory port. A pair that arrives while the previous one still waits is
  dropped and counted. After `SEG_LEN` pairs it pulses `seg_done`. The first layer's `lin`
  must equal `SEG_LEN`.

## Host interface

`spi_slave` uses SPI mode 0, MSB first, with SCLK below clk/8. Each frame is 64 bits:
`cmd[7:0] addr[15:0] data[39:0]`.

| cmd | action |
|-----|--------|
| 0x01 | weight word `addr` ← data[39:0] |
| 0x02 | data-memory byte `addr` ← data[7:0] (waits while the network runs) |
| 0x03 | register `addr` ← data[31:0] |
| 0x04 | read register `addr`; the value comes back on MISO during the data bits |

The registers are listed at the top of `rtl/bbmi_soc.sv`. They cover:

- control: auto-classify, force banks on, start now, sampling enable;
- CIC rate and segment length;
- status: last prediction, decision, early flag, busy, bank power, number of runs;
- early-stop thresholds;
- the PWM period, high time, mask and enable of each channel;
- counters for skipped classifications and sample overflows;
- the four layer descriptors. Layer L's 81-bit `layer_cfg_t` sits at 0x10+4L (bits 31:0),
  0x11+4L (bits 63:32) and 0x12+4L (bits 80:64). With the descriptors, the weights and the
  segment length, the host can load a different network, such as a 3-class network for
  shorter segments, without any change to the hardware.

## Simulating

Every testbench in `tb/` is self-checking and ends with
`TB_RESULT checks=N failures=M`. To build one, compile the packages first and let verilator
find the rest:

```
verilator --binary --timing --timescale 1ns/1ps -Irtl -y rtl -y tb rtl/muxnet_pkg.sv tb/cnn_ref_pkg.sv \
          tb/bbmi_soc_tb.sv --top-module bbmi_soc_tb -o sim && obj_dir/sim
```

| testbench | what it shows |
|-----------|---------------|
| stage1_mpu_tb | all 1024 table lines × 4 keys against the integer definition |
| stage2_mpu_tb, plmu_tb | per-plane lookup; signed shift-merge, extremes included |
| muxnet_pe_tb | both modes against plain dot products |
| weight_mem_tb, data_mem_tb, pg_ctrl_tb | memories, loss of data in a gated bank, bank policy |
| muxnet_ctrl_tb | a small mixed program (stride 2, partial chunks, m = 5/10 in conv and linear): every written byte, the class, and the exact cycle count |
| muxnet_tb | the full default network, three random weight sets: every byte, class, cycle count, bank power per layer |
| cic_filter_tb, sample_loader_tb, early_stop_voter_tb, pwm_module_tb, spi_slave_tb | the peripherals |
| bbmi_soc_tb | end to end at default sizes (see below), about 3 s |
| reconfig_tb | the chip reprogrammed over SPI alone: a 3-class network for 250-sample segments at CIC rate 4 (weights, four descriptors, SEG_LEN); per segment the class, the input placement and the exact classification time (16,450 cycles), then the majority vote |
| closed_loop_tb | the in-vivo setting at a 23 MHz clock: an NREM decision lights LED channel 0 at exactly 10 Hz / 10 % (checked edge by edge over two periods), a Wake or REM decision keeps it dark; about 20 s |

`bbmi_soc_tb` runs the whole chip at its default sizes. It loads the weights over SPI and
feeds ADC samples through the CIC filters. Two epochs run:

- **Early stop.** Six identical segments with all thresholds at 2 are decided after two
  classifications.
- **Majority.** Six different segments with no thresholds are decided by majority.

Both decisions are checked against `cnn_ref_pkg`, an independent integer model of the
network. The test also:

- measures the PWM duty cycle;
- provokes one sample overflow;
- reads the counters back over SPI;
- checks that every mechanism occurred at least once.

## How far to trust it, and where it departs from the source design

The published description gives the MUXnet in detail, and that part follows it closely:

- the static table with n = 2, m = 5, and weights stored as line indices;
- four stage-1 multiplexers, and bit-serial 4:1 stage-2 multiplexers (32 of them);
- the PLMU with the sign plane;
- the dual m = 5 / m = 10 mode, built by splitting the table into high and low halves;
- the 2048×40 weight and 512×64 data memories, with the data in five gated blocks;
- the network shapes, and six-segment voting with per-class early stop;
- two PWM channels triggered by chosen classes;
- a CIC decimator with rate 2 to 32.

The following are this design's own choices, where the description gives only a function
or a name:

- **Table contents.** The table lines are defined as exact, saturating sums of two 5-bit
  weights. The original enumerates "inner-product-compatible" tables offline, including
  non-uniform quantisation, and its list of lines is not available. Any other set of 1024
  lines can replace `st_value` without touching the datapath.
- **PE throughput.** The stated capacity, "8 groups of 8×8 inner products per cycle with
  32 multiplexers", is read here as 8 activation bit planes × 4 weight pairs. That gives one
  8-element, 8-bit inner product per cycle, which also matches one 40-bit weight word and one
  64-bit data word per cycle.
- **PE output mux.** The output mux of the original PE is not modelled: the PE always
  delivers the merged sum.
- **Controller.** The layer schedule, descriptor format, data layout and byte-serial
  gather. The original's classification time is not known, so the cycle count is not
  comparable. The reported 0.2 µJ at 172.4 µW suggests about 1.2 ms per classification,
  against 1.43 ms here at 23 MHz.
- **Memory banks.** The bank sizes (128 + 4 × 96 words), the gating policy and the
  no-retention model.
- **CIC filter.** First order, power-of-two rates, a 10-bit input and an 8-bit output.
  Which two of the eight channels feed the network is also this design's choice.
- **Voting.** The tie rule, the threshold encoding, and triggering PWM on the epoch
  decision rather than on each segment class.
- **Host side.** The SPI frame, the commands and the register map.
- **Bias.** None is applied.

Used on its own, the voter ignores a prediction that arrives in the same cycle as a segment
end. In the SoC this cannot happen:

- `seg_done` comes one cycle after the segment's last write;
- a write needs an idle network;
- `pred_valid` is high only in the first cycle after a run, and the cycle before it was still
  busy, so it cannot have held that last write.
