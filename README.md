# Smarty: ten TDCs and a reconfigurable neural network in one block

In a PET scanner every photodetector produces timestamps, and shipping all of
them off-chip is what drives data rates and system complexity. Smarty puts the
first processing step next to the detectors: ten time-to-digital converters
(TDCs) timestamp the comparator outputs of ten silicon photomultipliers, and a
small feed-forward neural network on the same die turns the ten timestamps of
one frame into a single result, such as the class of a source position or a
"no coincidence" verdict. The network is not fixed in silicon. Its shape (layer
count, neurons per layer) lives in a topology memory and its weights in a
coefficient memory, both written by a host processor over AXI, so one chip can
run a deep-narrow classifier, a wide-shallow regressor or anything else within
128 neurons and 1024 weights plus biases.

This repository holds synthesizable SystemVerilog for the digital part of that
design, a behavioural model of the one analog part (the ring oscillator), and
self-checking testbenches. It was written from the published description of the
chip. Where that description stops, the choices made here are listed in the
section [Departures and own choices](#departures-and-own-choices).

```
            clock domain 1 (asynchronous)                 clock domain 2 (CLK, 100 MHz)
 TDC_START_SPAD[9:0] ─┐
 TDC_START_ALL ───────┤ start    ┌────────┐ 22-bit codes  ┌──────────────────────────────┐
 TDC_START_ELECTRIC ──┤ select ─►│ 10 TDC │──────────────►│ ann                          │
 TDC_CNT_SEL[3:0] ────┘          │ tdc_bank│              │  input mux (10:1, or bypass) │
 TDC_STOP_ELECTRIC ─────────────►│        │               │  4 x nn_processor (MAC+ReLU) │
 TDC_nRST ──────────────────────►│        │─► TDC_CNT_OUT │  coef_mem   1024 x 10        │
                                 └────────┘               │  neuron_mem  128 x 32        │
                                                          │  topo_mem     78 x 8         │
 AXI4-Lite ◄──► axil_ram_bridge ◄── RAM_ADDR/WDATA/WE/RCE/RDATA ──►  nn_ctrl (FSM)     │
                                                          └──────────────────────────────┘
```

## The time-to-digital converters

Each TDC (`tdc`) measures the time between a START and the common STOP. START
sets a latch whose output EN lets a four-stage ring oscillator run; STOP clears
EN, which freezes the ring. Two things are then read:

* a 20-bit ripple counter (`tdc_ripple_counter`) that counted the falling edges
  of the last ring phase Q<3>, i.e. whole oscillation periods;
* the frozen state of the four phases Q<0:3>, which says how far into the
  current period the ring stopped (`tdc_therm_decoder`).

A four-stage ring with one inversion passes through eight states per period
(0000, 0001, 0011, 0111, 1111, 1110, 1100, 1000, bit 0 = Q<0>). The decoder
recovers the state index p (0..7) and the result is

    code[21:0] = { counter[19:0], p[2:1] }   =   4 * counter + fine

so one code step (the LSB) is two ring stages. The behavioural ring model
(`tdc_vco`) uses a stage delay of 26.75 ps, giving the 53.5 ps average LSB
reported for the chip and a full range of 2^22 LSB, about 224 µs. The
remaining half-LSB bit p[0] is brought out as `b2_o` but is not part of the
code. While EN is high the phase outputs Q<0:2> are gated off, which saves
power. Q<3> stays on because it clocks the counter. The read enable EN_read
rises when STOP arrives.

Usage rules that follow from this structure:

* pulse `tdc_nrst` low before each measurement, since the counter and ring
  only clear on reset;
* the code is valid from shortly after STOP until the next START, and the
  counter's ripple needs a few gate delays to settle after STOP;
* the codes are not synchronised to CLK. The ANN copies them when it is told
  to start, so software starts the ANN only after the stop.

`tdc_bank` holds the ten TDCs and three ways to start them. A channel starts
on its own pad `TDC_START_SPAD[j]` (detector mode), on `TDC_START_ALL` (all
channels together, used to measure transfer curves), or on
`TDC_START_ELECTRIC` when `TDC_CNT_SEL == j` (one channel, single-shot
tests). `TDC_CNT_OUT` shows counter bit 6 of the selected TDC. That bit
toggles every 64 ring periods, so an external counter can measure the ring
frequency.

## The neural network

### Neurons, coefficients and numbers

Neurons are numbered globally, input layer first. The example network below
has 3 inputs, 4 hidden neurons and 2 outputs, and the neuron indices are
O3..O11 (O0..O2 are the raw inputs):

    O3  = w0  + w1*O0            (input neurons: one bias, one weight, own input)
    O4  = w2  + w3*O1
    O5  = w4  + w5*O2
    O6  = w6  + w7*O3  + w8*O4  + w9*O5
    ...
    O10 = w22 + w23*O6 + w24*O7 + w25*O8 + w26*O9
    O11 = w27 + w28*O6 + ...

The coefficient memory holds exactly this sequence: neuron after neuron, bias
first, then one weight per input of the previous layer. A network with layer
sizes n0, n1, …, nL-1 therefore needs 2·n0 + Σ nl·(nl-1 + 1) coefficients, and
this must not exceed 1024. Input neuron j always reads ANN input j. In the
neuron memory, neuron i of the whole network sits at word i (the input
neurons O3.. above are words 0..2 here). The network's outputs are the last
n_{L-1} words.

The arithmetic is fixed point with 8 fractional bits:

| quantity | format |
|---|---|
| coefficient (bias or weight) | 10-bit two's complement, value = integer / 256, range −2 … +1.996 |
| activation, neuron output | 32-bit two's complement, value = integer / 256 |
| ANN input from a TDC | low 20 bits of the code as an integer, i.e. code·256 in the format above |
| product | 42-bit, shifted right arithmetically by 8 (rounds toward −∞) |
| accumulation | saturates at the 32-bit limits |
| activation function | ReLU on every neuron, output layer included |

In the bypass (stand-alone) mode the ten inputs come from registers instead of
the TDCs, as raw 32-bit values in the activation format.

### Topology memory

The 624 bits of topology memory are organised as 78 bytes:

| word | content |
|---|---|
| 0 | L, the number of layers including the input layer (1 … 77) |
| 1 … L | neurons in layer 0 … L−1 |

Every layer is fully connected to the previous one. The controller rejects the
topology and sets STATUS.error if a layer is empty, if the input layer is
larger than 10, or if the network needs more than 128 neurons or more than 1024
coefficients.

### How the four processors are scheduled

`nn_ctrl` walks the layers in order and splits each layer into groups of up to
four neurons, one per `nn_processor`. For a group of g neurons with fan-in F it
steps through k = 0 (the bias) … F:

* each clock it reads one coefficient, the one for processor p at address
  `group_base + p·(F+1) + k`, and hands it to processor p, with p cycling
  through the g processors;
* once per k it reads activation k−1 of the previous layer from the neuron
  memory and shares it with all g processors. The memory's read port keeps
  the value until the next read. In the input layer the value comes instead
  from the 10:1 input multiplexer.

The coefficient memory gives one word per clock, so the group takes g·(F+1)
clocks of multiply-accumulate work. Each processor thus gets a new operand every
g clocks, which leaves time for a slow multiplier. The g results then go through
ReLU and are written to the neuron memory, one per clock. Reads have one clock
of latency, so a single pipeline stage carries the request to the processors.

The clocks per inference, counted from the start command to the last write, are

    3 + Σ_layers ( 2 + Σ_groups ( 2 + g·(F + 2) ) )

This gives 1076 clocks (10.76 µs at 100 MHz) for the 10-13-13-13-13-13-3
classifier, which performs 855 multiply-accumulates (1710 operations), and 1067
clocks for the 10-70-2 network. The fabricated chip needs 22.44 µs at 105 MHz
for the same classifier (about 2356 clocks). Its controller was generated by
high-level synthesis and schedules differently. Here one MAC per clock is the
limit, which the coefficient memory's single read port sets.

## Host interface

`axil_ram_bridge` is an AXI4-Lite slave with 32-bit data and a 16-bit byte
address. It turns each transaction into one access on a simple memory-style bus
(`RAM_ADDR` word address, `RAM_WDATA`, `RAM_WE`, `RAM_RCE`, `RAM_RDATA` one
clock after `RAM_RCE`). A write completes when AWVALID and WVALID are both
high. WSTRB is ignored, so every write is a full word. Responses are always
OKAY and are held until the master accepts them. Word addresses (byte address
= 4 × word):

| word | name | access | meaning |
|---|---|---|---|
| 0x000 | CTRL | R/W | bit 0: write 1 to start an inference (ignored while busy); bit 1: BYPASS |
| 0x001 | STATUS | R | bit 0 busy, bit 1 done (cleared by the next start), bit 2 topology error |
| 0x002 | CYCLES | R | clocks taken by the last inference |
| 0x010–0x019 | IN0–IN9 | R/W | stand-alone inputs (activation format) |
| 0x020–0x029 | TDC0–TDC9 | R | live 22-bit TDC codes |
| 0x400–0x7FF | COEF | R/W | coefficients (read back sign-extended) |
| 0x800–0x87F | NEURON | R/W | neuron outputs ("OUT ANN") |
| 0xC00–0xC4D | TOPO | R/W | topology bytes |

A frame is processed as follows:

1. write TOPO and COEF once;
2. pulse TDC_nRST, fire the starts and then TDC_STOP_ELECTRIC;
3. write CTRL = 1;
4. poll STATUS until busy is 0;
5. read the output neurons.

Do not write the memories while busy is set. Nothing arbitrates the two
ports.

## Limits and the networks the design was evaluated with

| network | neurons (≤128) | coefficients (≤1024) | clocks |
|---|---|---|---|
| 10-8-8-8-8-6, fixed-point accuracy study | 48 | 378 | 467 |
| 5-13×5-1, optical single-shot regression | 71 | 830 | 964 |
| 10-13×5-2, coincidence, narrow-deep | 77 | 919 | 1061 |
| 10-70-2, coincidence, wide-shallow | 82 | 932 | 1067 |
| 10-13×5-3, on-chip classifier | 78 | 933 | 1076 |
| 10-13×5-4, classifier with four classes | 79 | 947 | 1091 |

All of them fit. The four-output classifier is this design's reading of the
four-class experiment; the chip's description names three output neurons. In
the fixed-point study with random weights of ±0.25 and TDC codes up to 10^6,
the relative error against a floating-point evaluation of the same network stays
below 0.03 %. That is the bound quoted for 8 fractional bits.

## Departures and own choices

The following follow the chip's published description: the block structure,
ten TDCs, the 20-bit counter, N = 4·N_coarse + N_fine, the pad names, the three
start modes and the 7th-bit monitor, four processors with multiplier, adder and
ReLU, the memory sizes (1024×10 coefficients, 128×32 neurons, 624-bit
topology), the limits of 128 neurons and 1024 coefficients, 8 fractional bits,
the bias-then-weights coefficient order and the bypass mode. The following are
this design's own:

* **Ring model and decoder table.** The eight-state ring sequence, the decoder
  mapping B1:B0 = p[2:1] and B2 = p[0], and the 26.75 ps stage delay. The ring
  is a behavioural model; supply voltage and mismatch (the chip's DNL/INL) are
  not modelled.
* **START/STOP latch.** It is level-sensitive (reset wins over set). EN_read
  is a second latch set by STOP.
* **Start combining.** The three start sources are ORed. TDC_START_ELECTRIC
  reaches only the channel named by TDC_CNT_SEL. "7th counter bit" is taken as
  bit 6.
* **ANN input.** It is the low 20 bits of the 22-bit code, scaled by 256. The
  codes are captured when the ANN starts. There is no synchroniser, because the
  codes are static by then.
* **Coefficient format.** Coefficients are 10-bit signed with 8 fractional
  bits. Products are truncated and sums saturate.
* **ReLU on every layer.** The output layer is rectified too, as the single
  ReLU path in the ANN block diagram implies. A network that needs negative
  outputs must offset them in training.
* **Topology format.** The byte layout and the error checks are own choices.
* **Schedule.** The controller is a hand-written FSM, not the HLS-generated
  one, so inference is about twice as fast as on the chip.
* **Bus.** AXI4-Lite, the bridge timing and the register map are own choices.
  The RAM_* names come from the block diagram. `ann_done_o` is an extra
  one-clock pulse per inference.
* **Not included.** The reference TDC "TDCR" and its PLL_CNT_OUT pad, whose
  purpose is not described. Also left out: the SoC PLL (CLK is an input), the
  RISC-V host, and the three supply domains VDD_RING, VDD_CORE and VDD_ANN.

## Simulating

Every testbench is self-checking and ends with a line
`TB_RESULT checks=N failures=M`. All `.sv` files of `rtl/` and `tb/` carry
`` `timescale 1ns/1fs ``, which the ring model needs. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/smarty_pkg.sv tb/tb_ref_pkg.sv tb/tb_smarty_top.sv --top-module tb_smarty_top
./obj_dir/Vtb_smarty_top
```

Replace the last file and top name for any other testbench. Start reset
signals high and pulse them low. Flip-flops with asynchronous reset only clear
on the falling edge.

| testbench | what it shows |
|---|---|
| `tb_smarty_top` | whole design at default sizes over AXI: staggered per-channel starts, start-all, electrical start and TDC_CNT_OUT; TDC codes against the interval; the 10-13×5-3 classifier on the measured codes, in bypass mode, then 10-70-2; topology error. Counts each mechanism |
| `tb_workloads` | all networks of the table above, exact against the integer model, clock counts, floating-point error |
| `tb_ann` | register map, both input modes, busy/done/error, START ignored while busy |
| `tb_nn_ctrl` | controller plus processors on 27 topologies (random and the paper's) and four illegal ones |
| `tb_nn_processor` | 20 000 random MAC/bias steps including saturation |
| `tb_axil_ram_bridge` | random AXI traffic with back-pressure |
| `tb_tdc_bank`, `tb_tdc` | codes against the START-STOP interval in all start modes |
| `tb_tdc_vco`, `tb_tdc_ripple_counter`, `tb_tdc_therm_decoder`, `tb_tdc_sr_latch` | the TDC parts on their own |
| `tb_coef_mem`, `tb_neuron_mem`, `tb_topo_mem` | both ports of each memory |

`tb/tb_ref_pkg.sv` holds the reference network model (64-bit integers,
floor(act·w/256), clamp to 32 bits, ReLU) and the clock-count formula above.
The end-to-end test takes about 15 s of wall time.

## Files

`rtl/smarty_pkg.sv` holds the shared sizes, types, register map and the
multiply-accumulate helper. The top is `rtl/smarty_top.sv`, which instantiates
`tdc_bank` (ten `tdc`, each made of `tdc_sr_latch`, `tdc_vco`,
`tdc_ripple_counter` and `tdc_therm_decoder`), `axil_ram_bridge` and `ann`
(with `coef_mem`, `neuron_mem`, `topo_mem`, four `nn_processor` and
`nn_ctrl`). Only `tdc_vco` is not synthesizable. The TDC latches and the
ripple counter are asynchronous logic that a synthesis flow must treat as
such. On chip the TDCs are full-custom and the memories are SRAM macros.
