# A 64-core phase-change-memory in-memory compute chip in SystemVerilog

Neural-network inference spends most of its time and energy on
matrix-vector multiplications (MVMs), and most of that energy is spent
moving weights. This design never moves them. Each of its 64 cores holds a
256 x 256 weight matrix as the conductances of phase-change memory (PCM)
devices. It multiplies that matrix with an input vector in one analog step:
the inputs become voltage pulses, Ohm's law does the multiplications, and
Kirchhoff's current law does the sums on the bit lines. Digital logic around
the array turns the summed currents into 8-bit activations. A mesh of 8-bit
links carries those activations from core to core. A row of LSTM processors
(GDPUs) sits in the middle of the core grid.

This repository is a register-transfer model of that architecture:

- synthesizable RTL for every digital block;
- behavioural models for the two analog blocks (the PCM array and the ADCs);
- a self-checking testbench for every block and for the whole chip.

It follows the 64-core PCM chip published by IBM Research ("HERMES",
14 nm). Where the publication gives no detail, this design makes its own
choices. Those choices are listed at the end and in each file's header.

## 1. Organisation of the chip

```
        col 0   col 1   ...   col 7
row 0   [core]  [core]        [core]      each core: 256x256 PCM cells,
row 1   [core]  [core]        [core]      256 ADCs, LDPU, link controller,
row 2   [core]  [core]        [core]      programming circuits
row 3   [core]  [core]        [core]
        [GDPU]  [GDPU]        [GDPU]      8 LSTM slices, fed by row 3
row 4   [core]  [core]        [core]
 ...
row 7   [core]  [core]        [core]
                 input buffer -> broadcast link to every core
```

`hermes_chip` contains the following:

- 64 `aimc_core` instances.
- 8 `gdpu_slice` instances.
- An `input_buffer`.
- The link wiring.

Configuration uses one write port, `cfg` = {we, addr[15:0], data[15:0]}.
A select field picks the target of each write:

- `cfg_sel` 0..63 selects core `row*8 + col`;
- `cfg_sel` 64..71 selects a GDPU slice.

In the real chip each core has a serial control interface. Its protocol is
not public, so this parallel port stands in for it.

The per-core output streams and the GDPU outputs are brought out as ports.
Everything outside the chip is left to the user. In the published system,
an FPGA moves activations between layers that the links do not connect.

All logic runs on one clock. The original runs the analog MVM at 1 GHz and
the digital post-processing at up to 400 MHz. Merging the two clocks leaves
the function the same but changes the cycle counts that depend on it. One
cycle is one nanosecond of input pulse.

## 2. The unit cell and the analog multiply

Each cell at row m, column n has four PCM devices:

- G1+ and G2+ on the positive bit line;
- G1- and G2- on the negative bit line.

The cell's weight is (G1+ + G2+) - (G1- + G2-). Each column has two source
lines, SL+ and SL-. Each source line is set to one of three states:

| SL state | effect on the row current |
|----------|---------------------------|
| V- (`SL_VNEG`) | adds the device current |
| V+ (`SL_VPOS`) | subtracts it |
| floating (`SL_HIZ`) | no contribution |

Each input is a signed INT8 value x. It is applied as a pulse of |x| clock
cycles. `TPWM` = 128 cycles is one modulation period.

**1-phase mode** does everything in one period:

- x > 0: SL+ at V-, SL- at V+;
- x < 0: SL+ at V+, SL- at V-.

The ADC's positive counter collects the cycles in which the row current is
positive, and the negative counter the others.

**4-phase mode** reads every device with V- only. This is more accurate
because PCM conducts differently for the two voltage polarities. It runs
four periods:

| phase | inputs driven | line driven | sign of product | ADC counter |
|-------|---------------|-------------|-----------------|-------------|
| 0 | x > 0 | SL+ | + | positive |
| 1 | x > 0 | SL- | - | negative |
| 2 | x < 0 | SL+ | - | negative |
| 3 | x < 0 | SL- | + | positive |

The modulator raises `neg_phase` in phases 1 and 2. In this mode the ADC
uses that flag, not the sign of the current, to choose its counter. In both
modes the result is y = P - N, where P and N are the two counts.

**Diagonal selection.** Each cell has two select lines:

- SEL1 gates its device-1 transistors;
- SEL2 gates its device-2 transistors.

The select lines run along diagonals: cell (m, n) is on diagonal
d = (n - m) mod 256. A diagonal has exactly one cell in every row and every
column. For an MVM every select line is on.

For programming and verify reads, one diagonal is on, with device 1,
device 2 or both. All 256 source lines can then be driven at once. Each
line reaches exactly one cell, and each row's ADC reads exactly one cell.
`diag_decoder` produces the select lines. `pcm_crossbar` applies them.

## 3. ADCs and counts

`cco_adc` is a behavioural stand-in for the current-controlled-oscillator
ADC of each row. It integrates the row current of every integrating cycle
and scales it by the gain trim (`A_TRIM + row`, 128 = 1.0). It reports
charge / `CHARGE_PER_COUNT` in two 12-bit counters, which saturate at 4095.

`CHARGE_PER_COUNT` is 512 by default. A verify read applies a 512-cycle
pulse to one device of conductance G. It therefore returns exactly G counts,
and all conductances in this design are quoted in counts. The
read-voltage offset DAC of the real ADC is not modelled.

## 4. Local digital processing unit (LDPU)

After an MVM, the 256 count pairs are processed into 256 INT8 outputs, one
per clock:

```
ADC counts --capture--> register arrays (left: even rows, right: odd rows,
                         128 each, copied over a 24-bit bus, one per cycle)
  --> convert-and-scale (one per side, each used every second cycle)
        t = i2f(P) * fa1[c] + fb[c]          FP16 FMA
        y = i2f(N) * fa2[c] + t              FP16 FMA   (fa2 = -1 after reset)
  --> multiplexer (alternates sides: channel order 0,1,2,...)
  --> activation block
        a = y * scale[c] + offset[c]  ; optional ReLU
        b = i2f(rx) * scale0 + a      ; optional ReLU   (rx = INT8 from the link)
        out = f2i(b)                  ; round to nearest even, saturate to INT8
```

All FP16 arithmetic is in `hermes_pkg`:

- each FMA is truly fused, with a single rounding;
- rounding is to nearest even;
- subnormals are flushed to zero;
- overflow saturates at 65504.

Together these functions are the datapath of the i2f, FMA and f2i units.

**Link input and stalls.** When link input is enabled (`A_ACTCTL+1`,
bit 2), channel j needs byte j of the incoming packet. That byte may come
from another core or from the input buffer. Bytes wait in a 256-byte FIFO.
When the byte for the next channel has not arrived, the issue stage
stalls. `stall_cycles` counts the cycles lost this way.

**Overlap of MVMs.** A core may start the next MVM while the LDPU is still
emitting the previous vector. The ADC results are handed over only when:

- the LDPU has finished the previous vector, and
- the register arrays have been emptied.

## 5. Links, packets and routing

A link is 8 data bits plus `valid` and `sop` (start of packet), one byte
per cycle. A packet is a one-byte preamble followed by payload bytes. Each
core has:

- 6 TX ports;
- 7 RX ports: 6 from neighbours and port 6 from the input buffer.

The `link_controller` has the five parts of the published design:

| part | function | registers (`A_LINK +`) |
|------|----------|------------------------|
| A | inserts a preamble in front of the LDPU stream; sends LDPU bytes `TX_START .. TX_START+TX_LEN-1` only | `L_TX_PRE`, `L_TX_START`, `L_TX_LEN` |
| B | per TX port: off, LDPU stream, or a hop from RX port k | `L_TX_ROUTE + t` = 0 / 1 / 2+k |
| C | preamble registers | `L_LDPU_PRE`, `L_HOP_PRE` |
| D | LDPU preamble check. Packets on enabled ports (`L_LDPU_EN` mask) with the LDPU preamble deliver payload bytes `RX_START .. RX_START+RX_LEN-1` to the LDPU. The lowest port wins a collision; the losing byte is counted in `rx_drop`. | `L_LDPU_EN`, `L_RX_START`, `L_RX_LEN` |
| E | hop check. Packets on enabled ports with the hop preamble are forwarded unchanged, preamble included, one cycle later. | `L_HOP_EN` |

This is how a layer larger than one core is assembled:

- A row-split layer sends partial sums along a chain of cores. Each LDPU
  adds the sum it receives to its own result.
- A packet can pass through cores that only forward it (hop).

**Fabric.** The fabric applies one pattern to every core. The pattern is
the one published for two example cores; rows are paired (0-1, 2-3, 4-5,
6-7). Core (r, c) receives on:

| RX | from |
|----|------|
| 0 | core (r-1, c), its TX 1 (the core above) |
| 1 | core (r+1, c), its TX 0 (the core below) |
| 2 | core (r, c+2), its TX 2 |
| 3 | core (r, c+1), its TX 3 |
| 4 | core (r^1, c+2), its TX 4 |
| 5 | core (r^1, c+1), its TX 5 |
| 6 | the input buffer (broadcast) |

GDPU slice c listens to TX 1 of core (3, c), the same wire that goes to the
core below it. The published chip has 418 physical links; this regular
pattern has 336. Connections outside the pattern are not reproduced.

## 6. GDPU slice (LSTM element processor)

Row 3 computes the four LSTM gate pre-activations. Their columns are
interleaved per element, I, A, F, O. The row-3 core sends them in one
packet to its GDPU slice, which takes one INT8 value per cycle:

```
g    = i2f(x) * in_scale[t] + in_off[t]          t = I, A, F, O
u    = tanh_LUT(g)                               17 comparators, 18 bins,
                                                 slope*g + offset (FMA)
gate = u * {0.5, 1, 0.5, 0.5}[t] + {0.5, 0, 0.5, 0.5}[t]
ia   = i * a
c    = f * c_mem[e] + ia        (cell state, 64 entries, cleared by G_CMD)
h    = tanh_LUT(c) * o
out  = f2i(h * out_scale + out_off)     one output per 4 input cycles
```

The sigmoids of I, F and O come from the identity
sigmoid(x) = 0.5 + 0.5 tanh(x/2). The x/2 goes into `in_scale`. The LUT
thresholds, slopes and offsets are registers (`A_GDPU + G_THR/G_SLOPE/G_OFF`).
The user fills them in; the testbenches use secant segments of tanh on
[-4, 4].

## 7. Programming the weights

`iter_prog` writes the targets of one diagonal. Each target is a signed
conductance in counts, held in registers `A_TARGET + row`. `prog_unit`
generates the pulses. It has 32 current DACs, each serving 8 source lines,
so one command takes 8 rounds. In round k, DAC i drives line 8i+k with one
pulse, followed by an idle cycle.

| pulse | shape (defaults, in cycles = ns) |
|-------|----------------------------------|
| RESET | 125 at code 224 (700 uA) |
| SET | 250 at code 40 (125 uA), the last 50 a falling ramp |
| iterative | 125 at the cell's own code |

The codes have an LSB of 3.125 uA.

The sequence for one diagonal:

1. RESET all four devices of every cell.
2. SET the devices of the weight's sign. One-device programming (ODP) sets
   device 1 only. Two-device programming (TDP, `P_TDP` = 1) sets devices 1
   and 2.
3. TDP only: read the two SET conductances g1 and g2 and compare them with
   the target G.
   - If gmin + gmax < G, the cell cannot reach the target; it is left alone.
   - If gmax < G, the gmin device is programmed and the gmax device stays
     SET.
   - Otherwise the gmax device is programmed and the gmin device is RESET.
4. Verify every cell, reading both devices of its sign. A cell within
   `P_MARGIN` (5) counts of its target is finished. Each other cell gets a
   new pulse with amp ← amp − `P_GAIN` × (G − read), limited to 125–700 uA.
   Repeat at most `P_MAX_ITER` (30) times.

A verify read is a `PRECHARGE` (256) cycle wait followed by a `VERIFY_W`
(512) cycle pulse on the selected devices. The sequencer reports the
iterations used and the number of converged cells.

The crossbar model's response to pulses is invented but plausible:

- a SET with a trailing edge gives the device's own SET conductance,
  70..130 counts, fixed per device;
- a square pulse of code I gives G_SET × (224 − I) / 184 with ±2 counts of
  noise.

No device physics beyond this is modelled: no drift, read noise or IR drop.

## 8. Register map (per core)

| address | contents |
|---------|----------|
| `0x0000 + n` | input x[n], INT8 |
| `0x0100 + c` / `0x0200 + c` / `0x0300 + c` | fa1 / fb / fa2, FP16 |
| `0x0400 + c` / `0x0500 + c` | activation scale / offset, FP16 |
| `0x0600` | scale0 for the link input, FP16 |
| `0x0601` | bit 0 ReLU1, bit 1 ReLU2, bit 2 link input enable |
| `0x0700 + ...` | link controller (section 5) |
| `0x0800 + m` | programming target of row m, INT8 |
| `0x0900 + ...` | programming: RESET amp/width, SET amp/width/edge, PROG width, initial amp, gain, margin, max iterations, TDP |
| `0x0A00 + m` | ADC gain trim |
| `0x0F00` | command. bit 0 MVM, bit 1 4-phase, bit 3 program diagonal `data[15:8]` |
| `0x1000 + ...` | GDPU slice (through `cfg_sel` 64..71) |

## 9. Timing

| operation | cycles |
|-----------|--------|
| 1-phase MVM, command to `mvm_done` (results then stream out one per cycle) | TPWM + 9 (clear 1, modulation, drain 2, ADC hand-over; 17 at TPWM = 8) |
| 4-phase MVM | 4 × TPWM + 9 |
| LDPU | 256 outputs in 256 cycles after a 2 + 3 cycle pipeline, longer if it stalls on the link |
| GDPU | 1 output per 4 inputs; 8 cycles from the O input to the output |
| programming command | 8 × (width + 1) |
| verify read | PRECHARGE + VERIFY_W + 3 |

The MVM figures include the ADC hand-over when the LDPU is idle.

## 10. Files

- `rtl/hermes_pkg.sv`: types, address map, FP16 arithmetic.
- `rtl/input_modulator.sv`, `rtl/diag_decoder.sv`: the array drivers.
- `rtl/pcm_crossbar.sv`, `rtl/cco_adc.sv`: behavioural models of the analog
  parts. They simulate but are not meant for synthesis: the array alone
  holds 64 × 256 × 256 × 4 bytes.
- `rtl/prog_unit.sv`, `rtl/iter_prog.sv`: weight programming.
- `rtl/adc_reg_array.sv`, `rtl/adc_convert_scale.sv`,
  `rtl/activation_block.sv`, `rtl/ldpu.sv`: the LDPU.
- `rtl/link_controller.sv`, `rtl/input_buffer.sv`: the link fabric.
- `rtl/tanh_lut.sv`, `rtl/gdpu_slice.sv`: the GDPU.
- `rtl/aimc_core.sv`, `rtl/hermes_chip.sv`: core and top.
- `tb/tb_<block>.sv`: one self-checking testbench per block. `tb/tb_fp16_pkg.sv`
  is an FP16 reference that uses `real` arithmetic, independent of the RTL's
  integer implementation.
- `tb/tb_hermes_chip.sv`: the whole chip at 4 × 4 cores of 16 × 16. It runs
  these scenarios:
  - partial-sum combining over a link, with an LDPU stall;
  - 1-phase and 4-phase MVMs;
  - a three-core hop;
  - an LSTM step through a GDPU over two timesteps;
  - input-buffer injection;
  - a link collision;
  - programming one diagonal.

  It counts each mechanism and fails if one never happens.
- `tb/tb_hermes_chip_full.sv`: the chip with every parameter at its default
  (8 × 8 cores of 256 × 256). Core 1 runs a 1-phase MVM and sends the result
  to core 0. Core 0 runs a 4-phase MVM and adds the received vector. All 512
  outputs and both latencies are checked.

## 11. Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_ldpu \
  -y rtl -y tb rtl/hermes_pkg.sv tb/tb_fp16_pkg.sv tb/tb_ldpu.sv
./obj_dir/Vtb_ldpu
```

Every testbench ends with `TB_RESULT checks=<n> failures=<m>` and has a
watchdog. The block testbenches build and run in well under a minute.

The chip testbenches build 16 or 64 copies of a core and are slow to
compile:

- the 4 × 4 end-to-end test takes a few minutes;
- the full-size test takes several minutes to compile and a few minutes to
  run.

The crossbar conductances can be preloaded through the hierarchy, for
example `dut.g_core[i].u_core.u_xbar.g[pol][dev][row][col]`. The testbenches
do this to skip programming.

## 12. Where this design departs from the original, and how far to trust it

Parts that follow the published design:

- the 8 × 8 grid and the GDPU row;
- the 8T4R cell with diagonal select lines;
- the 1-phase and 4-phase modulation;
- two 12-bit ADC counts;
- the LDPU order of operations: two FMAs for calibration, per-channel
  affine, ReLU, link add, ReLU, INT8;
- the two convert-and-scale units at half rate;
- the link controller's five parts and the preamble scheme;
- the GDPU data path, with its constants 0.5/1/0.5/0.5 and 0.5/0/0.5/0.5,
  17 comparators / 18 bins and 64-entry cell state;
- the programming pulses, the 32 × 8 DAC arrangement, ODP/TDP, the 5-count
  margin and the 30-iteration limit.

Choices of this design, not taken from the original:

- One clock for everything, with one cycle per LSB of input pulse.
- `TPWM` = 128, so an INT8 value of −128 is a 128-cycle pulse.
- The phase order of 4-phase mode.
- The address map, the command register, the parallel configuration port,
  and the MVM/LDPU overlap rule.
- Link framing: `sop`/`valid` bits, a one-byte preamble, the collision rule
  (lowest port wins, the loser is dropped and counted), and a 256-byte RX
  FIFO with issue stalls.
- The regular link pattern: 336 links instead of 418.
- The input buffer as a 512-byte FIFO broadcast to every core.
- FP16 corner cases: flush-to-zero, saturation, no NaN/Inf.
- The iterative-programming update rule, gain and starting amplitude, and
  running the loop in on-chip logic rather than in the host.
- Everything inside the analog models: counts per charge, saturation, and
  the device programming response.

Not modelled:

- the per-core serial control interface;
- the clock tree;
- the pads and package;
- the host FPGA;
- conductance drift, noise and ADC nonlinearity.

The digital blocks are checked against references written independently of
the RTL. The FP16 reference uses real numbers. The MVM reference integrates
row currents cycle by cycle. The LSTM reference checks its FP16 sequence
against real arithmetic to within the LUT's error. Each block testbench has
been checked on a deliberately broken copy of its block and fails there.
The analog behaviour rests on assumptions stated here. It is suitable for
checking dataflow, control and arithmetic, not for predicting accuracy.
