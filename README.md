# TinyVers in SystemVerilog: a versatile ML accelerator with hierarchical power management

TinyVers is a small system-on-chip for machine-learning inference on battery-powered
sensor nodes. Two ideas shape it:

* **One accelerator for many model types.** FlexML is an 8x8 array of processing
  elements (PEs). A layer-by-layer microcode program reconfigures it. The same hardware runs:
  * convolutions (CNN, TCN with dilation, strided convolutions);
  * transposed convolutions (deconvolution, as in auto-encoders);
  * fully connected and recurrent layers;
  * support-vector machines with L1 or L2 kernels.

  All of them run at 8-, 4- or 2-bit precision. Two features save work. Structured
  sparsity skips pruned channel blocks. Zero-skipping in deconvolution avoids the
  multiplications with the zeros that upsampling inserts.
* **Power that follows the duty cycle.** The chip is split into six switchable power
  domains plus an always-on domain. A wake-up controller (WuC) moves between five
  power modes:
  * boot and active;
  * data acquisition, where only the shared memory and the peripheral DMA run;
  * low-power data acquisition, which keeps only a 64 kB part of the memory;
  * deep sleep, which keeps only the controller and its real-time counter.

  The controller powers the domains up and down in a fixed order.

This repository holds synthesizable RTL for the accelerator, the shared L2 memory with
its interconnect, and the wake-up controller, plus self-checking testbenches. Some parts
sit at the top level as ports rather than RTL:
* the RISC-V host core, the peripheral DMA and its interfaces, the boot ROM and JTAG;
* the non-volatile MRAM and its controller;
* the power switches, isolation cells, level shifters and clock generation.

## Block map

```
                      +----------------------------- tinyvers ------------------------------+
 host core  --TCDM--> |  tcdm_xbar (3 masters, 8 banks, round robin) --> l2_mem             |
 uDMA       --TCDM--> |       ^                                        448 kB main (4 banks) |
                      |       | master 2                               64 kB LP   (4 banks)  |
 host APB   --------> |  flexml ------------------------------------------------------+     |
                      |    flexml_regs -> flexml_dma (L2 <-> private memories)        |     |
                      |    flexml_ctrl (ucode fetch/decode, loop FSM, 3-stage uops)   |     |
                      |    act L1 64 kB | weight L1 64 kB | sparsity 2x2 kB | ucode    |     |
                      |    L0 FIFO 16x8b -> 8x8 PE array -> adder trees -> max pool    |     |
                      |                                              -> NLFG           |     |
 host APB (AON) ----> |  wuc: top FSM + 6 x wuc_pd_fsm + wuc_rtc  --> pd_* controls    |     |
                      +--------------------------------------------------------------------+
```

| File | Role |
|---|---|
| `rtl/tv_pkg.sv` | Shared constants, precision/op/layer enums, the 128-bit ucode struct, requantisation, power-mode enum |
| `rtl/flexml_pe.sv` | One PE: precision-scalable multiplier, SVM datapath, 32-bit accumulator, normalisation, output register |
| `rtl/flexml_pe_array.sv` | 8x8 PEs with the two dataflows, row adder trees |
| `rtl/flexml_adder_tree.sv` | 8-input adder tree |
| `rtl/flexml_input_fifo.sv` | L0 FIFO feeding the PE columns |
| `rtl/flexml_act_l1.sv`, `flexml_weight_l1.sv`, `flexml_sparsity_mem.sv`, `flexml_instr_mem.sv` | Private memories |
| `rtl/flexml_nlfg.sv`, `flexml_maxpool.sv` | Post-processing units |
| `rtl/flexml_ctrl.sv` | Control unit |
| `rtl/flexml_dma.sv`, `flexml_regs.sv` | DMA engine and APB registers |
| `rtl/flexml.sv` | The accelerator |
| `rtl/tcdm_xbar.sv`, `rtl/l2_mem.sv` | Interconnect and shared L2 |
| `rtl/wuc_rtc.sv`, `wuc_pd_fsm.sv`, `wuc.sv` | Wake-up controller |
| `rtl/tinyvers.sv` | SoC top |

## The processing element

Each PE takes one 8-bit activation byte and one 8-bit weight byte per cycle. The meaning
of the byte depends on the precision:

| precision | operands per byte | products | added per cycle |
|---|---|---|---|
| INT8 | 1 x 8 bit | a*w (16 bit) | 1 MAC |
| INT4 | 2 x 4 bit | a0*w0 + a1*w1 (9 bit) | 2 MACs |
| INT2 | 4 x 2 bit | sum of four 2x2 products (6 bit) | 4 MACs |

All operands are signed two's complement. For the SVM modes the multiplier is reused:
* the L1 kernel adds |a - w|;
* the L2 kernel first halves the difference with round-half-up and saturates it to
  8 bits, then adds its square.

The L2 result is therefore (a-w)^2/4, up to rounding. Software sees one fixed scale
factor.

The 32-bit accumulator is normalised in four steps:
1. an arithmetic right shift by `shift`;
2. an optional ReLU;
3. saturation to the range of the selected precision (this is the overflow control);
4. the result is loaded into an output register.

The output registers of a column form a shift chain for write-back.

## Dataflows

**OX|K (convolution).** The eight columns hold eight neighbouring output pixels of one
row. The eight rows hold eight output channels.
* Each cycle one 64-bit weight lane is broadcast: row r gets the weight byte of output
  channel r.
* The L0 FIFO gives each column its input byte.
* Once all input channels and kernel taps are summed, the output registers are loaded.
  They shift down one row per cycle, so the 8x8 tile leaves the array in 8 cycles, one
  output channel per cycle.

**C|K (dense, RNN gates, SVM).** A 64-bit activation word holds eight input channels, and
column c gets channel c of it. Every PE gets its own weight byte: a 512-bit weight row
carries 64 unicast weights. Each row's adder tree sums its eight PEs, so the array
produces eight outputs (one per row) after ceil(C/8) cycles. They are written back as one
64-bit word.

## The L0 FIFO, strides, dilation and deconvolution

The FIFO has 16 byte entries.
* **Loading.** A conv step loads two 64-bit words, which gives 16 consecutive input bytes.
  Column j taps entry j, or entry 2j for stride 2.
* **Next kernel tap.** The FIFO shifts by `dil` entries. One of those shifts happens in
  the same cycle as the MAC.
* **Deconvolution.** The upsampled input has a zero between every pair of real pixels.
  * A row is loaded once with the 8 bytes spread over 16 entries: e[2i] = byte i and
    e[2i+1] = 0.
  * A phase bit `ctrl` selects taps j or j+1. Phase 0 gives "a 0 b 0 ..." and phase 1
    gives "0 b 0 c ...".
  * After every odd tap the FIFO advances two entries.
  * Rows of the upsampled input that are entirely zero (odd rows) are never visited. The
    `CNT_ROWSKIP` counter counts them.
  * When an output tile starts at an odd input word, a 64-bit realignment register in
    `flexml.sv` assembles the 8 needed bytes from two consecutive words.

## Structured sparsity

Pruning removes whole input channels (conv) or whole 8-channel blocks (C|K), separately
for each block of eight output channels.
* A 32-bit index word per output-channel block (and per 32 input channels) marks the
  pruned ones with a 1.
* The control unit reads the word before the first channel of a block. It skips pruned
  channels at the cost of one check cycle each, and counts them in `CNT_SKIP`.
* The weights of pruned channels are simply absent: weights are stored compressed, in
  the order of the kept channels.

## Control unit and ucode

A program is a list of 128-bit instructions in the instruction memory. After the start
bit the control unit fetches instruction 0, decodes it, runs the layer and moves on until
it meets `LT_END`. Then it raises the done bit and the interrupt.

Fields, MSB first (`tv_pkg::ucode_t`):

| field | bits | meaning |
|---|---|---|
| ltype | 4 | 0 conv, 1 deconv, 2 dense, 3 SVM-L1, 4 SVM-L2, 5 max-pool, 6 NLFG, 15 end |
| ix, iy | 8, 8 | input width and height |
| c, k | 10, 10 | input and output channels (k a multiple of 8) |
| fx, fy | 4, 4 | kernel size |
| in_ptr, w_ptr, out_ptr | 13 each | activation word, weight lane, output word addresses |
| sp_ptr | 10 | first sparsity index word |
| sparse | 1 | enable structured sparsity |
| stride, dil | 2, 4 | stride (1 or 2), dilation (>= 1) |
| shift, relu, prec | 5, 1, 2 | normalisation and precision |
| rsvd | 4 | unused |
| cnt | 12 | words processed by NLFG layers |

The loop nest runs k-block outermost, then output row, x-tile, input channel, fy and fx.
Every cycle the FSM issues one micro-operation. It travels down three stages:
* stage 0 issues the synchronous memory reads;
* stage 1 uses the read data (FIFO, MAC, write-back);
* stage 2 serves the pooling and NLFG units, which add one register.

Activation port A is shared by stage-0 reads and later-stage writes. The FSM inserts
idle cycles so the two never meet, and an assertion checks this.

Cycle cost of a convolution tile:
* two FIFO load cycles per (c, fy);
* then fx MAC cycles, plus (dil-1) extra shift cycles between taps;
* one zeroing cycle per tile;
* 8 write-back cycles, plus one idle cycle.

For a 3x3 kernel this is about 60 % MAC utilisation. A dense layer spends one cycle per
8 input channels.

### Memory layout used by the control unit

* **Activations** are stored [channel][row][x], 8 pixels per 64-bit word. Each row is
  padded by two words, so the row stride is ix/8+2 words. The padding lets the FIFO read
  past the right edge.
* **Conv outputs** use the same layout, with row stride ceil(ox/8)+2. A result can
  therefore feed the next layer directly.
* **Conv weights** are one 64-bit lane per (k-block, kept channel, fy, fx), with byte r
  holding output channel r.
* **C|K weights** are one 512-bit row per (k-block, kept channel block), with byte
  r*8+j holding output r and input j.
* **Dense outputs** are one word per k-block.
* **Precision of stored values.** Results at INT4/INT2 are stored one value per byte,
  saturated. Repacking them for a following low-precision layer is left to software.

## Private memories and the DMA engine

| memory | size | organisation |
|---|---|---|
| activation L1 | 64 kB | 8192 x 64 bit, two 32 kB ping-pong banks (address MSB) |
| weight L1 | 64 kB | 1024 rows x 8 lanes x 64 bit, ping-pong by row MSB |
| sparsity index | 2 x 2 kB | 1024 x 32 bit, ping-pong by address MSB |
| instructions | 1 kB | 64 x 128 bit |

Each memory has a core port and a DMA port. When both hit the same bank the core wins and
the DMA waits. A DMA job can therefore fill one half while the array computes from the
other.

The DMA engine is a single sequential channel on the 32-bit TCDM bus. It does not overlap
loads with write-backs. It works with
req/gnt, and read data returns one cycle after the grant.
* A 64-bit word takes two beats, the low half at the lower address.
* Targets: activations (both directions), weight lanes, sparsity words, and instruction
  beats (beat 0 = bits 31:0).

## APB registers of the accelerator

| offset | name | contents |
|---|---|---|
| 0x00 | CTRL | write bit0: start program, bit1: start DMA job |
| 0x04 | STATUS | bit0 core busy, bit1 DMA busy, bit2 core done, bit3 DMA done (sticky; write 1 to clear) |
| 0x08 | DMA_L2 | L2 byte address |
| 0x0C | DMA_L1 | L1 word / lane / beat address |
| 0x10 | DMA_LEN | words to move |
| 0x14 | DMA_CFG | bits1:0 target (0 act, 1 weight, 2 sparsity, 3 instr), bit2 act L1 -> L2 |
| 0x18 | NLFG | bits3:0 segment, 15:8 slope, 23:16 offset |
| 0x1C / 0x20 / 0x24 | counters | MAC cycles, sparsity skips, deconvolution row skips |

**NLFG.** The non-linear function generator splits the signed 8-bit input range into
16 equal segments. It computes y = sat8(((slope*x) >>> 6) + offset), where slope and
offset belong to the segment of x. Tanh, sigmoid, swish and similar functions are loaded
as tables of 16 lines.

## Shared L2 and interconnect

L2 is 512 kB of 32-bit words in eight banks:
* **Data-acquisition memory:** four banks hold the 448 kB below 0x70000.
* **Low-power (LP) memory:** four banks hold the 64 kB at 0x70000-0x7FFFF.

The two regions are separate power domains. Consecutive words go to consecutive banks.
The interconnect arbitrates each bank round-robin among three masters (host core, uDMA,
accelerator DMA), and a winner's access completes in one cycle.
`l2_conflicts_o` counts the cycles in which some request waited. Reads from an unpowered
region return zero, and assertions flag accesses to it.

## Power management: the wake-up controller

Domains and their state in each mode (1 = on):

| mode | logic | L1 | L2 data acq. | L2 LP | MRAM | uDMA |
|---|---|---|---|---|---|---|
| boot | 1 | 1 | 1 | 1 | 1 | 1 |
| active | 1 | 1 | 1 | 1 | 0/1 | 1 |
| data acquisition | 0 | 0 | 1 | 1 | 0 | 1 |
| LP data acquisition | 0 | 0 | 0 | 1 | 0 | 1 |
| deep sleep | 0 | 0 | 0 | 0 | 0 | 0 |

The controller runs on the always-on clock and has two levels of FSMs.

**Per-domain FSM (`wuc_pd_fsm`).** It walks the chain power-on, clock-enable, isolate,
reset, switch-2, switch-1, power-off. Powering down moves one step at a time to the
right, and waking moves back. Its outputs follow the state:
* the clock is enabled only in power-on;
* isolation is active from isolate onwards;
* reset is asserted from reset onwards;
* switch group 2 opens at switch-1;
* switch group 1 opens at power-off.

A domain therefore takes 6 steps each way, with `SETTLE` cycles per step.

**Top-level FSM (`wuc`).** It walks power-on, logic+L1, MRAM, uDMA, L2, power-off. In
each middle state it brings that group's domains to the state the target mode needs and
waits for them.

**Entering and leaving a mode.** The host enters a low-power mode by writing CMD (mode
and go bit); only the three low-power modes are accepted. Two events can wake the SoC:
* the external pin;
* the millisecond real-time counter. It counts from entry into the low-power mode, using
  33 always-on cycles per ms at 33 kHz.

On wake-up the FSM walks back to power-on, bringing up active mode (MRAM optional) or
boot mode, and pulses `wake_irq_o`.

WuC registers (always-on APB):

| offset | name | contents |
|---|---|---|
| 0x00 | CMD | write: bits 2:0 mode (2 data acquisition, 3 LP data acquisition, 4 deep sleep), bit 8 go |
| 0x04 | WAKE | bit0 wake into boot, bit1 MRAM on, bit2 RTC wake, bit3 pin wake |
| 0x08 | RTC_CMP | wake time in ms |
| 0x0C | STATUS | top state, domains on, mode |
| 0x10 | RTC | ms counted |

**Wake-up latency** with `SETTLE = 1`, measured in always-on cycles from the wake event
to the wake interrupt:

| from | cycles | at 33 kHz |
|---|---|---|
| data acquisition | 11 | |
| LP data acquisition | 17 | |
| deep sleep | 23 | 0.70 ms |

The silicon figure this design is held against is 0.79 ms (26 cycles) from deep sleep.

**Effect of the pd_* controls at the top.**
* The accelerator is held in reset by the logic domain's reset.
* Isolation clamps the host's and accelerator's L2 requests (logic domain) and the
  uDMA's requests (uDMA domain) to zero.
* An L2 region counts as powered only while both of its switch groups are closed.

## Where this RTL departs from the chip or fills gaps

* **Not modelled:**
  * loss of memory contents in powered-off domains: memories keep their data;
  * clock-domain crossing: the WuC outputs are slow level signals and no synchronisers
    are modelled;
  * MRAM state retention.
* **Weight memory width.** The source describes the weight memory both as giving 8 words
  from 2 internal banks and as unicasting 64 words from its 8 banks. This design uses
  8 banks of 64 bits.
* **Chosen here:** the pipeline, loop order, data layouts, instruction width, field widths
  and the register maps. So are the NLFG segment count and slope format, and the 2x2 max
  pool.
* **Not implemented:** strides other than 1 and 2, and kernels larger than the FIFO
  window (fx*dil + 8 <= 16, or fx <= 8 at stride 2).
* **Control overheads** (load, zeroing and write-back cycles) lower the peak MAC rate
  compared with the silicon. Expect about 60 % array utilisation on 3x3 convolutions.
  The paper's figure corresponds to about 58.6 MACs per cycle.
* **Synthesis.** The full-size memories are behavioural arrays and should be replaced by
  SRAM macros. The top-level synthesis check runs out of memory because of them.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.
* **Unit tests** compare against models written independently in the testbench. They cover:
  * the PE, in all precisions and SVM modes;
  * the adder tree, max pool and NLFG;
  * the four private memories with concurrent ports and ping-pong grants;
  * the RTC, whose wake-up falls exactly at cmp x 33 cycles;
  * the domain FSM, checking each state's outputs;
  * the L0 FIFO, including the three-cycle deconvolution tap pattern;
  * the wake-up controller for every low-power mode and wake target, with exact
    wake-up latencies and RTC timing.
* **System test `tb/tb_tinyvers.sv`** runs the whole SoC at its default sizes:
  1. The host writes data, weights, sparsity masks and a 12-instruction program into L2.
  2. The DMA moves them into the accelerator. The program runs a mix of layers:
     * conv INT8 with ReLU;
     * sparse conv;
     * deconvolution;
     * conv at stride 2 with INT4;
     * conv with dilation 2 at INT2;
     * dense, sparse dense, SVM-L1 and SVM-L2;
     * max pool and NLFG.
  3. All results are DMA'd back while the host competes for L2. Every valid output byte is
     compared with a reference model.
  4. The SoC then goes through data acquisition (the uDMA writes L2 while the host is
     isolated), LP data acquisition and deep sleep. It wakes by pin and by RTC, and every
     domain control and the wake-up latency are checked.
  5. Each of the 22 mechanisms exercised is counted, and one that never occurred fails the
     test.

  It runs in well under a minute. It is also the test for the PE array, control unit,
  DMA engine, registers, interconnect and L2.

Simulating with Verilator:

```
verilator --binary -Wno-fatal --top-module tb_tinyvers \
    rtl/tv_pkg.sv $(ls rtl/*.sv | grep -v tv_pkg) tb/tb_tinyvers.sv
./obj_dir/Vtb_tinyvers
```

Replace the top module and testbench file to run any other test.
