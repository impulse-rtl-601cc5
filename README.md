# IMPULSE-style fused weight / membrane-potential compute-in-memory macro (SystemVerilog)

A spiking neural network (SNN) layer keeps two kinds of state: the synaptic weights and
the membrane potential (V_MEM) of every output neuron. A conventional accelerator reads
both from SRAM, adds them in a separate datapath and writes V_MEM back, which costs most
of its energy. This macro keeps weights and membrane potentials in **one** SRAM array
whose bitlines are shared. Every SNN operation is an in-array instruction: two rows are
read at once, the column peripherals under the array add (or compare, or copy) them bit by
bit, and the result is written straight back into a third row in the same clock cycle.
An input neuron that does not spike costs no instruction at all, so the work scales with
spike activity.

This RTL models the 65 nm test macro described in the IMPULSE paper (Agrawal, Ali et al.,
Purdue) at the level of wordlines, bitlines and column peripherals. It follows the paper's
block diagram, sizes and instruction set. Where the paper shows no circuit, the choices
made here are listed in the "Departures and choices" section below.

## Array organisation and the staggered mapping

| | rows | columns | contents |
|---|---|---|---|
| W_MEM | 128 (addresses 0..127) | 72 | one row per input neuron: twelve 6-bit signed weights |
| V_MEM | 32 (addresses 128..159) | 72 | six 11-bit signed values per row |

Weight `j` of a row occupies columns `6j .. 6j+5`, LSB first. Each weight row has two
read wordlines. **RWLo** reaches columns 0-5, 12-17, ... (weights 0, 2, ..., 10) and
**RWLe** reaches columns 6-11, 18-23, ... (weights 1, 3, ..., 11). A V row has a single
read wordline.

Each adder is 12 columns wide: a 6-bit weight added to an 11-bit membrane potential.
Twelve weights per row can therefore only be served six at a time. Work alternates
between an **odd cycle** (even-numbered neurons, RWLo) and an **even cycle**
(odd-numbered neurons, RWLe). Between the two the adders shift by six columns:

```
odd cycle : adders on columns  0-11 | 12-23 | 24-35 | 36-47 | 48-59 | 60-71
even cycle: adders on columns  6-17 | 18-29 | 30-41 | 42-53 | 54-65 | 66-71 + 0-5 (wraps)
```

A V word lives in the 12 columns of its adder, and odd-cycle and even-cycle words sit in
different V rows. Inside the 12 columns:

```
slot column:  0  1  2  3  4  5  6  7  8  9 10 11
V bit      :  0  1  2  3  4  '0' 5  6  7  8  9 10      (11-bit signed, bit 10 = sign)
weight bit :  0  1  2  3  4  5(sign)  -- the other weight parity's cells, not enabled --
```

Slot column 5 lines up with the weight's sign bit. It must always hold `0` in V rows.
During AccW2V that column's bitline then reads the weight sign (Wsign) on its own. This is
why V_MEM is 11 bits and not 12.

Neuron `j`, bit `k` of its V word lies in column `(6*(j%2) + 12*(j/2) + pos) mod 72`,
where `pos = k` for `k < 5` and `pos = k + 1` otherwise. `tb/impulse_tb_pkg.sv` uses this
formula to pack and unpack rows.

## Bitline computing

Each column has a read bitline pair. When several read wordlines are on, RBL is pulled
low by any enabled cell that stores 1, so `RBL = NOR` of the enabled bits. RBLB is pulled
low by any enabled cell that stores 0, so `RBLB = NAND`. The sensing inverters (SINV)
turn these into OR, NOR, NAND and AND. The bitwise-logic full adder (BLFA) then builds:

```
XOR  = NOR(NOR, AND)
SUM  = XOR ^ CIN
COUT = XOR ? CIN : AND
```

So two operand rows are added without either being read out as a word.

Only the lower six columns of an adder see a weight cell. The upper six see only the V
cell. In AccW2V the CS column's sensed bit (the weight sign) is forwarded to those six
columns, which add `V bit + Wsign`. This is the sign extension of the 6-bit weight.

## Column peripheral modes

The 72 peripherals form a single carry ring; column `c` takes its carry from column
`c-1`. The parity of the cycle gives every column one of four modes:

| mode | position in adder | carry behaviour |
|---|---|---|
| LSB | 0 | carry in forced to 0 (cuts the ring) |
| CF  | 1-4, 6-10 | carry out goes to the next column |
| CS  | 5 | carry in passes through unchanged; supplies Wsign; never written by compute instructions |
| MSB | 11 | its result gives the SpikeCheck decision |

Every path around the ring passes an LSB column, so the loop never closes logically.
Lint and synthesis tools still report it as a combinational loop. It is the real ripple
topology and is kept on purpose.

## Instructions

One instruction per clock cycle. Inputs are sampled at the rising edge; the write-back,
the spike buffer and `dout` update at that edge. `par_even` = 0 selects the odd cycle,
1 the even cycle.

| `instr` | code | ADDR1 | ADDR2 | ADDR3 | effect, per neuron of the selected parity |
|---|---|---|---|---|---|
| `I_NOP`      | 0 | - | - | - | nothing |
| `I_READ`     | 1 | - | row | - | `dout <= row` (weight rows: both halves) |
| `I_WRITE`    | 2 | - | - | row | `row <= din` (all 72 columns) |
| `I_ACCW2V`   | 3 | W row | V src | V dst | `dst = src + sign_extend(w)` |
| `I_ACCV2V`   | 4 | V row B | V row A | V dst | `dst = A + B` |
| `I_ACCV2V_C` | 5 | V row B | V row A | V dst | as AccV2V, only neurons whose spike bit is set |
| `I_SPIKECHK` | 6 | - | V | threshold row | `spike[j] = (V + T >= 0)` |
| `I_RESETV`   | 7 | - | reset row | V dst | `dst = reset`, only neurons whose spike bit is set |

Arithmetic wraps at 11 bits; there is no saturation. The threshold row stores the
**negated** threshold `-Th`, so a neuron spikes when `V >= Th`. SpikeCheck uses the sign
of the sum extended by one bit, which is exact for every pair of 11-bit operands. Source
and destination may be the same row; the read sees the old value.

The data rules the user must keep:

* Every V row that takes part in computation must have its `'0'` columns written to 0
  once, including rows used only as ping-pong destinations. Compute instructions never
  write those columns.
* A V row holds the words of one parity. Use it only with instructions of that parity.

## Neuron models as instruction sequences

Per timestep, for every input neuron `i` that spikes, issue two instructions:
`AccW2V(odd, W=i, src, dst)` and `AccW2V(even, W=i, src', dst')`. Inputs without a spike
cost nothing. At the end of the timestep, per parity:

* **IF**: `SpikeCheck(V, -Th)`, then `ResetV(reset row -> V)`
* **LIF**: `AccV2V(V + (-leak))`, then `SpikeCheck`, then `ResetV`
* **RMP** (soft reset): `SpikeCheck`, then `AccV2V_C(V + (-Th) -> V)`

The spike buffer then holds the layer's 12 output spikes. The testbench uses this row map
(address `128 + k`): `k` = 0/1 potential (odd/even), 2/3 its ping-pong partner, 4/5 negated
threshold, 6/7 reset value, 8/9 negated leak. This follows the paper's timing diagram.

A layer wider than 12 neurons needs several macros or reloaded weights. A fan-in above 128
needs partial sums over several weight blocks, accumulated with AccV2V.

## Module map (`rtl/`)

| file | role |
|---|---|
| `impulse_pkg.sv` | sizes, instruction and mode enums, decoded-control struct, column-mode functions |
| `impulse_macro.sv` | top level |
| `triple_row_dec.sv` | three addresses -> up to two RWLs (RWLo/RWLe by parity) and one WWL |
| `cim_array.sv` | 160 x 72 array, wired NOR/NAND read bitlines, masked row write |
| `col_periph_bank.sv` | 72 peripherals: modes per parity, carry ring, Wsign forwarding, spike decisions |
| `col_periph.sv` | one column: SINV, operand selection, BLFA, carry mux, conditional write driver |
| `blfa.sv` | bitwise-logic full adder |
| `spike_buffer.sv` | 12 spike bits, loaded by SpikeCheck per parity |
| `impulse_ctrl.sv` | instruction decoder |

Not modelled: the precharge circuit and the 10T cell as circuits (only their logical
effect is modelled), the test chip's pads and clocking, and the host that issues the
instruction stream (the testbench plays that role).

## Departures and choices

These items are not given by the paper:

* The CMUX is modelled inside every column, not only at the 6-column boundaries. The
  function is the same.
* The sixth even-cycle adder wraps from column 71 to column 0. The paper states six values
  per V row and the 6-column stagger, but not the wrap.
* How Wsign enters the upper columns (as a second operand of the BLFA) is this model's own.
* The spike decision uses the extended sign (`A ^ B ^ COUT` in the MSB column). The paper
  speaks of the MSB column's carry-out, but a bare carry-out gives wrong decisions for
  negative potentials.
* The CS column never writes during compute instructions. This keeps the `'0'` columns at 0.
* There is an extra instruction, `I_ACCV2V_C`: AccV2V with the write gated by the spike
  buffer. RMP needs it to subtract the threshold only from the neurons that spiked.
* All of these are this design's own: the instruction encoding, the address roles of
  AccV2V / READ / WRITE, the explicit `par_even` input, single-cycle timing with
  read-before-write, the asynchronous reset of the spike buffer and `dout`, and the
  un-reset array.

## Simulation

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`. Example with
plain Verilator:

```
verilator --binary --timing --timescale 1ns/1ps --top-module tb_impulse_macro \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/impulse_pkg.sv tb/impulse_tb_pkg.sv \
  tb/tb_impulse_macro.sv -o sim && obj_dir/sim
```

`tb_impulse_macro` runs the whole macro at full size:

* 128 x 12 weights, 10 timesteps each of IF, LIF and RMP
* the RMP run uses 100 inputs, like the first layer of the paper's sentiment network
* 15% of inputs spike (85% sparsity)
* after every timestep it checks the spikes, both V rows and the cycle count (one
  instruction per cycle) against an integer neuron model
* it counts each mechanism and fails if one never occurs: odd and even AccW2V, skipped
  silent inputs, negative weights, 11-bit wrap, leak, RMP subtract and keep, spike and
  no spike, masked ResetV, a spike from the wrapped adder, and in-place read/write

Each block also has its own testbench (`tb_<module>.sv`). `tb_col_periph_bank` checks all
six adders of both parities against integer arithmetic.
