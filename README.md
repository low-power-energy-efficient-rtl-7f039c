# Atrial-fibrillation detection on an ultra-low-power FPGA: RTL

This is the logic inside the FPGA of a patch-style ECG loop recorder. The
FPGA records two ECG leads without a break. It cuts the recording into
120-second windows and classifies each window with a very small
convolutional network: atrial fibrillation (AF) or not. A window without AF
is thrown away. A window with AF, or one the patient marks by pressing a
button, is kept in on-chip RAM. The FPGA then raises an interrupt and flashes
an LED until the Bluetooth SoC next to it has read the window out over SPI.

The design follows the publication *Low-power, Energy-efficient,
Cardiologist-level Atrial Fibrillation Detection for Wearable Devices*
(Loroch, Feldmann, Rybalkin, Wehn). That paper gives the system, the kinds of
layers, the quantisation scheme and the resource budget. It does not give the
exact network topology, the interfaces or the control logic. Those are filled
in here and marked as this design's own choices in the sections below and in
each file's header.

## The idea: a streaming network that needs no feature-map memory

The target FPGA (a Lattice iCE40 UltraPlus class device) has 128 KB of
single-port RAM. All of it is taken by the loop recording. The network must
therefore live in the small block RAMs and registers that are left, so it
cannot keep whole feature maps. Each layer is a small unit that takes one
value at a time from the layer before it and passes one value at a time on.
All the layers of one window run at the same time. The only buffers are:

* a **line buffer** in each depthwise layer, holding the last K time steps;
* an **accumulator memory** in each pointwise layer, holding COUT partial sums;
* the **weights**.

Nothing is stored between layers except the valid/ready handshake.

```
 ECG samples (2 ch)                                                        logit
  -> dw1: depthwise K=128 S=8 -> pw1: 2->128 +bias +ReLU
  -> dw2: depthwise K=16  S=8 -> pw2: 128->32 +bias +ReLU
  -> GAP+FC: 32 -> 1                                                      -> AF = logit > 0
```

Each of the five units has exactly one multiplier, five in all. That matches
the 62 % DSP use (5 of 8) the paper reports for its final implementation.

## Network

### Layers

A depthwise-separable convolution splits a K-tap convolution from CIN to
COUT channels into two steps:

* a **depthwise** step: one K-tap filter per channel,
  `d[j][c] = sum_k x[j*S+k][c] * Wd[k][c]`;
* a **pointwise** step: a 1x1 convolution across channels,
  `y[j][o] = ReLU( sum_c d[j][c] * Wp[c][o] + b[o] )`.

The cost falls from `H*K*CIN*COUT` to `H*CIN*(K+COUT)` multiply-accumulates.
The batch normalisation that follows each convolution during training is
folded into the pointwise bias `b`. The ReLU is part of the pointwise unit's
output stage, not a unit of its own. Convolutions are "valid": there is no
padding, and output `j` uses inputs `j*S .. j*S+K-1`. The stride never
exceeds the kernel size (S <= K), so a line buffer of K time steps is always
enough.

The network ends in global average pooling (GAP) over time and a fully
connected layer with one output, the logit. Both are linear, so they are
fused:
`logit = (1/H2) * sum_j sum_c y[j][c] * Wfc[c]`.
This is accumulated as the values stream in. The pooled vector is never
stored. The division by H2 is a multiplication by `round(2^24/H2)` followed
by a rounding shift, so H2 need not be a power of two.

### Default topology and where it comes from

| unit | kernel / stride | channels | output length per window | weights |
|------|-----------------|----------|--------------------------|---------|
| dw1  | K1=128, S1=8    | 2        | H1 = (30720-128)/8+1 = 3825 | 256 |
| pw1  | 1x1             | 2 -> 128 | 3825                     | 256 + 128 bias |
| dw2  | K2=16, S2=8     | 128      | H2 = (3825-16)/8+1 = 477 | 2048 |
| pw2  | 1x1             | 128 -> 32| 477                      | 4096 + 32 bias |
| GAP+FC | -             | 32 -> 1  | 1                        | 32 |

The paper deploys a 2-layer model with 7328 parameters (14.6 KB, that is 16
bits each). It does not print the layer sizes. The sizes above are one point
of the paper's search space (powers of two) that gives exactly 7328
parameters, counting batch norm as four values per pointwise channel:
256 + 256 + 4·128 + 2048 + 4096 + 4·32 + 32 = 7328.
Folded, the hardware stores 6848 words (13.7 KB). The strides are assumed. One point is uneasy. The paper says kernel-size
limits were added for the final model, but it does not print the limit, and
K1 = 128 is as large as the biggest kernel of the earlier 3-layer model. The
only other power-of-two shapes that also give 7328 have 4 channels after the
first layer and 1024 after the second, which seems less likely.
The input is 120 s of two channels at an assumed 256 Hz, so H0 = 30720 time
steps. Every size is a parameter of `dnn_af` and `afd_top`.

## Number formats and rounding

This is where a re-implementation most easily goes wrong: a result that is
off by one LSB shows up as a different logit.

| quantity | width | fractional bits |
|----------|-------|-----------------|
| activation (also the ADC sample) | 16 | 8 |
| weight, bias | 16 | 6 |
| product activation x weight | full | 14 |
| accumulator | 48 | 14 (no rounding while summing) |
| MAC result | 32 | 12 |

The fractional bits (weights +6, MAC results +12, activations +8) are the
paper's. The total widths are this design's choice.

Every layer does its arithmetic in the same order:

1. Sum the products at full precision.
2. Round once to the MAC format. This drops 2 bits.
3. Add the bias, shifted left by 6. Pointwise layers only.
4. Saturate to 32 bits.
5. Round to the activation format. This drops 4 bits.
6. Saturate to 16 bits.
7. Apply ReLU. Pointwise layers only.

The GAP+FC logit is rounded straight from the accumulator to the MAC format.
Rounding is always half away from zero, and saturation is the normal
two's-complement range. This is the hardware form of the quantiser
`Q_{w,p}(x)` used in training. Read literally, that formula clips at
`2^{w-p-1}-1` in real units, which is a little inside the word's range. The
RTL uses the full two's-complement range. The helpers live in `afd_pkg`.
The testbenches use their own golden model (`tb_ref_pkg`), written
separately from the RTL.

## Streaming schedule and timing

Streams carry one 16-bit activation per beat, in time order with the channel
index fastest: x[0][0], x[0][1], ..., x[1][0], and so on. A beat moves when
`valid && ready`. Every unit holds its output stable while it waits for
`ready`; an assertion checks this in every unit. Memories are read
synchronously, as block RAM needs, so each multiply-accumulate takes two
cycles: one to present the address, one to multiply and add.

| unit | work | cycles |
|------|------|--------|
| dw (C, K, S) | after every S-th complete time step (once K are buffered), computes C outputs | C·(2K+1) per output step; input blocked meanwhile |
| pw (CIN, COUT) | each input element updates all COUT sums; the last channel of a step releases the outputs | 2·COUT per element, plus the output handshakes |
| GAP+FC (C, H) | one MAC per element; logit 3 cycles after the last one | 2 per element |

The units stall each other through `ready`. A depthwise unit does not accept
input while it computes, and a pointwise unit in its output phase waits for
the next layer. The ADC cannot wait, so a 256-entry FIFO (`stream_fifo`) sits
between acquisition and the network. It absorbs these bursts and counts any
overflow. With the defaults, pw2 is the busiest unit, at about 3.9 M cycles
per window. Even at a 1 MHz clock that is about 4 s of work for each 120 s
window. The full-size simulation drives one ADC frame every 500 cycles and
never overflows the FIFO.

The paper's layers come from a fully pipelined high-level-synthesis library.
This RTL is simpler:

* One multiply-accumulate every two cycles in each unit.
* A depthwise unit stops taking input while it computes.

The layers still run at the same time, and they start as soon as data
arrives. The price is throughput, and the ECG rate leaves a very large
margin for it.

**The result can come before the window ends.** Only
`((H0-K1)/S1)·S1 + K1` time steps reach dw1 outputs that dw2 uses. With the
strides rounding down, the last few samples of a window touch nothing the
classifier sees. The controller therefore latches the result whenever it
arrives and acts on it once the window is recorded. It does not wait for a
result after the last sample.

## Recorder sequencing (`recorder_ctrl`)

| state | what happens | leaves when |
|-------|--------------|-------------|
| CLEAR | zeroes every loop-buffer word, one per cycle; the network and the FIFO are held in clear | all words written -> ACQ |
| ACQ | each sample goes to the loop buffer at the next address and into the FIFO | WINDOW samples -> WAIT_NN; button -> EVENT (manual) |
| WAIT_NN | waits for the latched or arriving result | AF -> EVENT; no AF -> CLEAR; button -> EVENT |
| EVENT | irq high, LED toggles every LED_HALF cycles, SPI owns the RAM port | DONE command -> CLEAR |

Samples that arrive outside ACQ are dropped and counted. The paper gives the
sequence: record, analyse, interrupt and LED on AF, keep the data until it
has been read, clear, resume, and a manual button trigger. The following are
this design's choices:

* clearing by writing zeros;
* ending the window at once when the button is pressed;
* dropping samples while not recording;
* a level interrupt.

The button input passes a two-flop synchroniser. It is not debounced,
because an external push-button controller does that on the board.

## Host SPI (`spi_slave`)

The Bluetooth SoC is the SPI master. The protocol is SPI mode 0, MSB first,
with an active-low chip select. The FPGA samples SCLK, CS and MOSI with its
own clock, so that clock must be at least 8 times SCLK. The first byte of a
frame is the command. Replies start in the second byte.

| cmd | name | bytes that follow |
|-----|------|-------------------|
| 0x01 | STATUS | reply: flags `{state[1:0], 0, 0, fifo_overflow, manual, af, event}`, logit (4 bytes, MSB first), dropped-sample count (2 bytes) |
| 0x02 | READ | reply: loop-buffer words from address 0 upwards, high byte first, for as long as CS stays low |
| 0x03 | DONE | none; ends the event, and the FPGA clears and resumes |
| 0x04 | WEIGHT | groups of 5 bytes `{sel, addr_hi, addr_lo, data_hi, data_lo}`; sel 0..4 = dw1, pw1, dw2, pw2, fc |

Weight addresses:

* depthwise: `k*C + c`;
* pointwise: `ci*COUT + co`, with the biases at `CIN*COUT + co`;
* FC: `c`.

On a production FPGA the weights would come preloaded in the bitstream; the
WEIGHT command is this design's way of loading them. The paper names only
the SPI link and "configuration/status registers". The whole command set is
this design's.

## ADC interface (`adc_spi_master`)

The ADC is assumed to run freely and to signal each conversion with an
active-low data-ready line. On each data-ready the FPGA reads one frame over
SPI mode 0 at clk/(2·DIV): 2 x 16 bits, channel 0 first. It then passes the
two samples on in consecutive cycles. Channel 0 appears
2·DIV·32 + 5 cycles after data-ready is first seen low. The ADC part and its
frame format are assumptions; a real ADC also needs configuration commands,
which are not included here.

## Loop buffer (`loop_buffer`)

The loop buffer is a 65536 x 16 single-port RAM with synchronous read. That
is the size of the four 16K x 16 single-port RAM blocks of the FPGA taken
together. One window of 2 x 30720 samples fits. It is written as a plain
array. A vendor build would put the four RAM primitives behind the same
ports.

## eMMC storage (`emmc_ctrl`)

When the phone cannot be reached, the SoC sends a window back to the FPGA
over a second SPI, and the FPGA writes it into eMMC flash. The paper only
says that this controller exists, so everything in it is the simplest
working choice:

* **SPI frame.** A frame starts with a 4-byte block address. Data bytes
  follow. Every 512 bytes form one block at the next address. A frame that
  ends part-way through a block is zero-filled to the end of that block.
* **Buffering.** There are two 512-byte buffers. One fills from SPI while the
  other is written to the card. The `emmc_busy` pin tells the SoC to wait.
  It is high until the card is initialised, and while the buffer that is
  filling is still in use. Bytes sent anyway are dropped and counted.
* **Card bus.** The bus is 1 bit wide and uses one clock rate,
  `clk/(2·EMMC_DIV)`. Outputs change on the falling clock edge, and inputs
  are sampled on the rising edge.
* **Start-up.** 80 idle clocks, then CMD0, then CMD1 repeated until the card
  reports power-up done, then CMD2, CMD3 (RCA = 1) and CMD7.
* **Writes.** Each block is a CMD24, then a data packet on DAT0 (start bit,
  4096 bits, CRC16, end bit). The controller then reads the card's CRC
  status token and waits out the busy period.
* **Errors.** A missing response is retried. A bad CRC status sets `err`.
  Response CRCs are not checked.

There is no read-back path from the eMMC.

## What is not here

* **eMMC read-back.** The paper says stored data can later be sent on or
  read over USB. The FPGA only writes; there is no read path.
* **Clock generation.** The top takes a clock input.
* **Off-board parts.** These are outside the FPGA: the analog front end, the
  ADC, the Bluetooth SoC, the RTC, USB, the charger, the eMMC device, the LED
  and the button.
* **Trained weights.** The trained network weights are not part of this
  release. The testbenches load random weights, chosen so that the decision
  is known in advance.

## Files

| file | content |
|------|---------|
| `rtl/afd_pkg.sv` | formats, rounding/saturation helpers, weight selector enum |
| `rtl/dw_conv1d.sv` | depthwise convolution with line buffer |
| `rtl/pw_conv1d.sv` | pointwise convolution, bias, fused ReLU |
| `rtl/relu_requant.sv` | output stage: round, saturate, ReLU |
| `rtl/gap_fc.sv` | fused global average pooling and FC, AF decision |
| `rtl/dnn_af.sv` | the network: five units chained by streams |
| `rtl/stream_fifo.sv` | sample FIFO with overflow counter |
| `rtl/adc_spi_master.sv` | ADC read-out |
| `rtl/loop_buffer.sv` | loop-recording RAM |
| `rtl/recorder_ctrl.sv` | recorder state machine, irq, LED, button |
| `rtl/spi_slave.sv` | host SPI command interface |
| `rtl/emmc_ctrl.sv` | second SPI receiver and eMMC block-write controller |
| `rtl/afd_top.sv` | FPGA top |
| `tb/tb_ref_pkg.sv` | golden model of the arithmetic |
| `tb/adc_model.sv`, `tb/bgm240_model.sv`, `tb/emmc_model.sv` | behavioural ADC, SPI host and eMMC device |
| `tb/tb_*.sv` | one self-checking testbench per unit; `tb_afd_top` (reduced size) and `tb_afd_top_full` (default size) share `tb_afd_core` |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. A
watchdog ends a run that hangs. For example, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_afd_top rtl/afd_pkg.sv tb/tb_ref_pkg.sv tb/tb_afd_top.sv
./obj_dir/Vtb_afd_top
```

The simulator has only two states, so everything that is read is reset or
initialised. The testbenches use `$urandom`.

What each testbench checks:

* **Unit testbenches:** every output value against the golden model, with
  random input gaps and back-pressure, and the cycle counts given above.
* **`tb_afd_top`:** the end-to-end test at a reduced size (H0=128, K1=64,
  C1=C2=16). It covers:
  * weight loading over SPI;
  * an AF window with its STATUS and full read-out;
  * a window without AF;
  * a button press part-way through a window, whose read-out shows the
    recorded samples followed by zeros;
  * FIFO back-pressure;
  * storing 512 bytes of the AF window in eMMC over the second SPI.

  It checks every sample against the ADC model and every logit against the
  golden model.
* **`tb_emmc_ctrl`:** the start-up sequence, two full blocks, a partial
  block, and overflow with a slow card. The eMMC model checks every CRC7 and
  CRC16.
* **`tb_afd_top_full`:** one complete cycle with all defaults. It loads
  6848 weights over SPI, records and classifies a 120 s window (AF), reads
  all 61440 words back over SPI, stores one block in eMMC, sends DONE and
  waits for the clear. It runs
  in about 75 s of Verilator time.

## Changing the design

* **Network shape:** `K1 S1 C1 K2 S2 C2 H0` on `afd_top` and `dnn_af`. K and
  C must be powers of two, S <= K, and `H0*2 <= DEPTH`.
* **Formats:** `afd_pkg`. The golden model in `tb/tb_ref_pkg.sv` hard-codes
  the shifts (2, 4, 6 and 26), so it must be changed to match.
* **More MACs per layer:** the scheduling is inside each unit's state
  machine. The stream interfaces between units stay the same.
