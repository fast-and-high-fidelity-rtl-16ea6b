# Gated photon counting and neural-network readout of a trapped-ion qubit

A trapped-ion qubit is read out by shining a detection laser on the ion: in the
"bright" state it scatters photons, in the "dark" state almost none. A photomultiplier
(PMT) turns the detected photons into TTL pulses. To decide the state in a single shot,
the pulses are counted in short, fixed sub-bins during a detection window, and the
short sequence of counts is classified by a small fully-connected neural network. Using
the shape of the count sequence instead of only its sum tolerates the ion jumping from
bright to dark during detection, so fewer sub-bins are needed for the same fidelity.

This RTL is the programmable-logic side of such a readout, following the published
system *Fast and High-Fidelity Readout of Single Trapped-Ion Qubit via Machine
Learning Methods* (Ding et al.). That system counted photons in an FPGA and ran the
network on the ARM core of a Zynq device. Here the counting, the register interface to
the processor, the state output pin and, as an addition, a hardware version of the
network are given as synthesizable SystemVerilog.

Main numbers, as published: 100 MHz logic clock; 30 us sub-bins (a 33.3 kHz sub-bin
clock); a 160 us gate holding five sub-bins in the main configuration; a network of up
to 10 inputs, 20 ReLU hidden units and 2 outputs, bright when y1 > y2; a bright result
shown as three 1 us pulses on an output pin. About 150 us of counting plus 21 us of
ARM inference gave 99.5 % fidelity in the original work.

## One shot, start to finish

1. The experiment controller raises `gate_in`. Two flip-flops synchronise it to the
   100 MHz clock. Its synchronised rising edge restarts the sub-bin divider at phase 0,
   clears the ten count registers and resets the sub-bin index.
2. Every 3000 cycles (30 us) the divider marks the end of a sub-bin. The counter has been
   adding one for every synchronised rising edge of `pmt_in`. It writes the total into
   `COUNT[i]`, starts the next sub-bin at zero, and raises the sub-bin interrupt. The
   processor may read each count as soon as it is ready.
3. `gate_in` falls. A sub-bin that had not completed is dropped: a 160 us gate gives
   five counts, and the last 10 us are ignored. The gate-end interrupt is raised.
4. The state is decided in one of two ways, chosen by `CTRL.hw_nn`:
   * Software (`hw_nn = 0`, the reset default, and the original arrangement). The
     processor reads the counts, evaluates the network and writes bit 0 of `STATE`.
   * Hardware (`hw_nn = 1`). The gate-end event starts `fnn_engine`. The state is ready
     `20*(n+1) + 42` cycles later: 162 cycles (1.62 us) for n = 5 inputs and 262 cycles
     for n = 10. The engine-done interrupt is raised.
5. A bright result sends three 1 us high pulses on `state_pin`, 1 us apart. A dark result
   leaves the pin low. In hardware mode the first pulse begins
   `3 + 20*(n+1) + 42` cycles after the gate's falling edge, give or take one cycle
   (1.65 us for n = 5).

## Sub-bin timing: the part to get right

All the logic runs on the single 100 MHz clock. The published design fed a divided
33.3 kHz clock (CLK2) to the counter. Here the divider produces the same waveform as a
level (`clk2`: high in the first half of each sub-bin, brought out on a top-level pin
for observation). The counter itself uses a one-cycle strobe, `bin_end`, in the last
cycle of each sub-bin. This avoids a derived clock domain while keeping the sub-bin
boundaries locked to the gate, as the original design requires. A third output,
`bin_mark`, gives a 1 us pulse right after each complete sub-bin. This is the marker
seen on oscilloscope traces of the original system; it is for observation only.

* **Alignment.** The gate and the PMT pass through identical synchronisers, so they
  keep their relative timing. A sub-bin covers cycles `k*3000 ... k*3000+2999`, counted
  from the cycle in which the synchronised gate rose. The gate-to-sub-bin uncertainty is
  one clock period (10 ns). This matches the 10 ns bound given in the original work.
* **Edges on a boundary.** A PMT edge seen in the last cycle of a sub-bin counts in
  that sub-bin. An edge seen in the cycle in which the gate rose counts in sub-bin 0.
* **Pulse width.** Each PMT pulse and each gap between pulses must last at least one
  clock period (10 ns), or the synchroniser may miss an edge. At the published
  saturation rate of 1.39e5 counts/s a sub-bin holds about four photons, so there is a
  wide margin.
* **Limits.** Counts are 16 bits and saturate. Only the first `MAX_BINS` (10) sub-bins
  of a shot are stored. Later ones are still counted in `STATUS[7:0]`, and
  `STATUS[9]` (overflow) is set.

## The network and its number format

For the first `n` inputs (`CTRL.num_bins`, 1..10, reset value 5), with counts `x[i]`:

    hid[h] = clamp( B1[h] + sum_{i<n} W1[h][i] * x[i] , 0 , 2^24 - 1 )     h = 0..19
    y[o]   = B2[o] * 2^8 + sum_{h<20} W2[o][h] * hid[h]                     o = 0, 1
    state  = bright if y[0] > y[1], else dark

The weights and biases are signed 16-bit words with 8 fractional bits. The counts are
integers. So `hid` has 8 fractional bits (clamped to 24 bits) and `y` has 16. The
accumulator is 48 bits wide and cannot overflow for any inputs. The fixed-point format
is this design's own choice: the original network ran in floating point on the
processor. To use a trained network, multiply each weight and bias by 256 and round.
Keep them inside +-128.

The weight memory has 262 words. It is laid out for 10 inputs even when fewer are used:

| words     | content                      |
|-----------|------------------------------|
| 0..199    | W1[h][i] at `h*10 + i`       |
| 200..219  | B1[h]                        |
| 220..259  | W2[o][h] at `220 + o*20 + h` |
| 260..261  | B2[o]                        |

The engine performs one multiply-accumulate per cycle with a single 16 x 25-bit signed
multiplier. Each hidden unit takes n+1 cycles (bias, then n products). Each output takes
21 cycles. The counts are copied into the engine when it starts, so a new gate can open
while it is still working.

## Register map (AXI4-Lite, 32-bit registers)

| address       | name    | access | content |
|---------------|---------|--------|---------|
| 0x000         | CTRL    | RW     | [0] hw_nn, [7:4] num_bins (reset 0x50) |
| 0x004         | STATUS  | RO     | [7:0] complete sub-bins, [8] gate, [9] overflow, [10] engine busy, [11] a state has been produced, [12] last state (1 = bright) |
| 0x008         | IRQ     | R/W1C  | [0] sub-bin count ready, [1] gate end, [2] engine done |
| 0x00C         | IRQ_EN  | RW     | enables; `irq = |(IRQ & IRQ_EN)` |
| 0x010         | STATE   | W      | [0] state from software; fires the pin when hw_nn = 0 |
| 0x014 / 0x018 | Y1 / Y2 | RO     | low 32 bits of the network outputs |
| 0x040 + 4i    | COUNT[i]| RO     | photons in sub-bin i, i = 0..9 |
| 0x400 + 4k    | WMEM[k] | RW     | weight word k, sign-extended on read |

A write is accepted when its address and data are both valid and no write response is
pending. A read is answered in the following cycle. `wstrb` is ignored. Unmapped
addresses return SLVERR. Assertions in `readout_regs` check the AXI rules that a valid
request or response is held until it is accepted.

A processor serving the software path does the following: it enables the interrupts;
on each sub-bin interrupt it reads `STATUS[7:0]` and then that count; on the gate-end
interrupt it evaluates the network and writes `STATE`. The end-to-end testbench
follows exactly this sequence.

## Modules

| file | role |
|------|------|
| `rtl/readout_pkg.sv`    | constants (clock, sub-bin divide, network shape, widths), weight layout, register map, types |
| `rtl/sync_edge.sv`      | two-flop synchroniser with edge strobes (gate and PMT) |
| `rtl/freq_divider.sv`   | gated 100 MHz to 33.3 kHz sub-bin divider: `clk2` level and `bin_end` strobe |
| `rtl/photon_counter.sv` | per-sub-bin PMT edge counter, shot start and end events |
| `rtl/readout_regs.sv`   | AXI4-Lite register bank, interrupts, mode select for the state pin |
| `rtl/fnn_engine.sv`     | sequential N-20-2 ReLU network with its weight memory |
| `rtl/state_pulse.sv`    | three 1 us pulses for bright on the STATE pin |
| `rtl/readout_top.sv`    | connects everything; plain-signal ports only |

Top-level parameters: `DIV` (3000 cycles per sub-bin), `PULSES` (3), `HIGH_CYC` (100)
and `LOW_CYC` (100). The divider also has `MARK_CYC` (100), the length of the sub-bin
marker. Network sizes and word widths are set in `readout_pkg`.

## What follows the original design and what does not

Taken from the published work:
* the 100 MHz clock and the 30 us sub-bin;
* a divider started and stopped by the gate;
* counting of PMT rising edges per sub-bin;
* an interrupt at every sub-bin end and at the gate's end;
* count and state registers reached by the processor over AXI;
* the 10-input (5 used in the main setting), 20-unit ReLU, 2-output network;
* the bright rule y1 > y2 (given for the published CNN, applied to this network as well);
* the triple 1 us pulse for a bright state.

This design's own choices:
* a clock-enable strobe instead of a derived 33.3 kHz clock;
* the position of the 1 us sub-bin marker, right after each sub-bin end;
* two-flop synchronisers;
* dropping a partial last sub-bin;
* 16-bit saturating counts and an overflow flag;
* the whole register map, reset values and interrupt clearing;
* the fixed-point format;
* the 1 us gap between state pulses;
* restarting a burst when a new bright result arrives.

The largest departure is `fnn_engine`. The original system ran the network as ARM
software and reported about 21 us per inference. The engine is an optional hardware
path for the same function, about 13 times faster. The software path remains the reset
default, so the register bank can be used exactly as in the original system.

Outside this RTL: the ARM processor and its software, the PMT, the ion trap, and the
offline training of the network. The convolutional network and the other classifiers
that the original work compared on a PC are not part of the readout hardware and are
not built.

## Simulation

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`. Example with Verilator 5:

    verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl -y tb \
        rtl/readout_pkg.sv tb/tb_readout_top.sv --top-module tb_readout_top
    ./obj_dir/Vtb_readout_top

| testbench | what it checks |
|-----------|----------------|
| `tb_freq_divider`   | sub-bin strobes, `clk2` and the marker against a cycle counter at DIV = 10 and 3000; five complete sub-bins in a 160 us gate |
| `tb_photon_counter` | the count pattern 0 1 2 0 1 0 0 0 1 3 from the original timing diagram; edges on sub-bin boundaries; random shots; partial last sub-bin; overflow; saturation |
| `tb_readout_regs`   | every register, interrupts, both state paths, the weight window, SLVERR |
| `tb_fnn_engine`     | a worked example, random networks against a 64-bit reference, ReLU and saturation, exact latency |
| `tb_state_pulse`    | exact pin waveform for bright, silence for dark, restart |
| `tb_workload_sweep` | the published sweep: 1 to 10 sub-bins at 1.26, 2.95 and 5.90 uW. Counts are Poisson with the published saturation fit. Each shot is checked for counts, outputs, decision, pin burst and delay. It prints how often a hand-set threshold network is right (a trained network was not published) |
| `tb_readout_top`    | end to end at full size (3000-cycle sub-bins): weight loading over AXI, six shots of 5, 10 and 12 sub-bins in both modes, counts read during the shot, network outputs against a reference, pulse count and gate-to-pin delay; counts the interrupts, both modes, the mode switch, bright and dark results, dropped partial sub-bins and overflow, and requires each at least once |

`tb/axil_bfm.sv` is an AXI4-Lite master model that stands in for the processor in the
tests. The end-to-end test simulates about 1 ms of operation in well under a second.

Not verified: behaviour on real hardware, timing closure at 100 MHz, and PMT pulses
shorter than 10 ns.
