# ME-SRAM: a normally-off SRAM cache slice that computes XOR/XNOR on its bit-lines

An edge device that sits idle most of the time loses most of its energy to
SRAM leakage. ME-SRAM attacks that in two ways at once.

* **Normally-off.** Every SRAM bit-cell carries its own non-volatile backup: a
  magneto-electric FET (MEFET). A MEFET is a transistor-like device whose
  channel resistance is set by the sign of a ~100 mV voltage across a
  magneto-electric (chromia) gate layer, and which keeps that resistance
  without power. Before the array is power-gated, every cell copies its bit
  into its MEFET in one parallel step (*store*). After power returns, every
  cell re-forms its bit from the MEFET in one parallel step (*restore*). The
  array can therefore be switched off whenever it is idle.
* **In-situ computing.** Two rows of the same sub-array can be activated
  together on a read bit-line that is precharged to VDD/2. The bit-line then
  settles at VDD, VDD/2 or ground, depending on whether the two bits differ.
  A two-comparator sense amplifier turns that level into XOR or XNOR on
  every bit-line in one clock cycle. Binarised neural networks use XNOR plus
  popcount as their multiply-accumulate, so a whole slice becomes a wide BNN
  engine next to an image sensor.

This repository holds SystemVerilog for that slice. The digital parts are
synthesizable RTL. The analog parts (the MEFET and the transistor-level
bit-cell) are behavioural models. The cell arrays are modelled at bit level.

## 1. The bit-cell and its five operations

The cell is an 8T SRAM cell plus a backup branch:

* **M1 to M4** are the cross-coupled inverters with nodes Q and QB.
* **M5 and M6** are pull-downs, gated by the lines **SPL** and **SPR**.
* **M7** equalises Q and QB. It is gated by **PSE** and is active low.
* **MR** is a read transistor. Its gate is QB, and it connects the read
  bit-line **RBL** to the read word line **RWL**.
* **M10 and M11** put Vpst (when Q = 1) or Vnst (when QB = 1) on the MEFET
  gate.
* **M12** passes that write voltage to the MEFET gate while **STR** is high.
* **M8 and M9** connect Q to the MEFET and QB to a reference resistor
  Rref = (Ron+Roff)/2 while **RSTR** is high.

| operation | RBL | RWL | PSE | SPL | SPR | STR | RSTR |
|-----------|-----|-----|-----|-----|-----|-----|------|
| hold      | VDD | VDD | 1 | 1 | 1 | 0 | 0 |
| read      | precharge | 0 | 1 | 1 | 1 | 0 | 0 |
| write     | VDD | VDD | pulse | data | ~data | 0 | 0 |
| store     | VDD | VDD | 1 | 1 | 1 | 1 | 0 |
| restore   | VDD | VDD | pulse | 0 | 0 | 0 | 1 |

**The stored bit is QB.** This is the point readers most often get backwards.

* A write first equalises Q and QB to VDD/2: PSE is low and SPL = SPR = 0.
* It then drives SPL = data and SPR = ~data. SPL = 1 discharges Q, so writing
  a 1 leaves Q = 0 and QB = 1.
* A read discharges RBL through MR exactly when QB = 1.
* The sense amplifier's memory output is the *inverted* comparator output, so
  it returns QB, the written bit.
* A store with Q = 1 applies Vpst and leaves the MEFET at Roff (63.4 MΩ).
  With QB = 1 it applies Vnst and leaves the MEFET at Ron (1.05 kΩ).
* A restore races the MEFET branch against Rref. When the MEFET is at Ron,
  Q discharges first. Restore therefore reproduces QB as well: MEFET at
  Ron = 1 = QB.

`rtl/me_sram_cell.sv` models one cell at this logic level, together with
`rtl/mefet_model.sv`. The MEFET model has:

* a switching time of 20 ps;
* a fixed read-out delay of 200 ps;
* a restore race that settles in 50 ps;
* an initial state of Roff.

`tb/tb_me_sram_cell.sv` steps the cell through hold, write, read, store,
power-off, power-on and restore in 100 ps phases, for both data values.

## 2. Computing on the read bit-line

For an X(N)OR, rows A and B of one column are activated together. A's RWL is
tied to VDD, B's RWL to ground, and RBL is precharged to VDD/2. The two MR
transistors form a divider:

| QB(A) | QB(B) | RBL    | XOR |
|-------|-------|--------|-----|
| 0     | 0     | VDD/2 (nothing conducts) | 0 |
| 1     | 1     | VDD/2 (divider)          | 0 |
| 1     | 0     | VDD                      | 1 |
| 0     | 1     | ground                   | 1 |

The sense amplifier (`rtl/sense_amp.sv`) is built as follows:

* **SA1** fires when RBL > Vref2. It is enabled by En2.
* **SA2** compares RBL with Vref1 or Vref3, chosen by S1. It is enabled by
  En1, and its output is inverted to give `Mem`.
* An OR of SA1 and Mem gives XOR, and an inverter gives XNOR.
* A mux on S1,S0 picks the output.

| En2 En1 S1 S0 | output |
|---------------|--------|
| 0 1 1 x       | memory read (Mem) |
| 1 1 0 0       | XOR2 |
| 1 1 0 1       | XNOR2 |

Vref1 < Vref3 < Vref2 is required. In the RTL, RBL is an 8-bit fraction of
VDD (255 = VDD), and the references are VDD/4, VDD/2 and 3VDD/4. A read
senses at 10 % of VDD when QB = 1. The comparators are ideal
greater-than operations. The exact reference voltages, and the rule that S1
selects Vref3 for memory reads, are this design's choices.

## 3. Slice organisation

```
mesram_top            2.5MB slice: 20 ways x 4 banks = 80 banks
 ├─ mesram_ctrl       command decoder + timing control, SA bits, sleep/wake
 ├─ transpose_buffer  64 x 64 bit buffer on the bus side
 ├─ mesram_dpu        popcount / batch-norm / activation / quantisation
 └─ mesram_bank x80   32KB
     └─ mesram_matrix x2      16KB, global decoder, 2:1 sub-array mux
         └─ mesram_subarray x2    8KB = 256 rows x 256 bit-lines
             ├─ qb_mem / nv_mem   SRAM bits and MEFET states
             └─ sense_amp x256    one per bit-line, 4:1 column mux to 64 bits
```

A host word address (`mesram_pkg::addr_t`) holds these fields, from the top
bit down:

| field | bits |
|-------|------|
| way   | 5 |
| bank in way | 2 |
| matrix | 1 |
| sub-array | 1 |
| row | 8 |
| column group | 2 |

The IO word is 64 bits. IO bit *i* of column group *g* is bit-line 4*i*+*g*.
Both operands of an X(N)OR must lie in the same sub-array (same bank, matrix
and sub-array). `row_b` names the second row.

Each sub-array evaluates all 256 bit-lines in one cycle. The result is
registered, and the 64 bits of the addressed column group come out on
`rdata` one cycle later.

## 4. Commands, timing and normally-off operation

Commands use a valid/ready handshake. A command is taken in a cycle where
`cmd_valid && cmd_ready`.

| command   | array operation | cycles | result |
|-----------|-----------------|--------|--------|
| READ      | read, SA = memory | 1 | `rdata` next cycle |
| WRITE     | write 64-bit word | 1 | – |
| TWRITE    | write column `row_b` of the transpose buffer | 1 | – |
| XOR/XNOR  | two-row X(N)OR in one sub-array | 1 | `rdata` next cycle |
| XNOR_ACC  | XNOR, result also added into the DPU | 1 | DPU updated the cycle after |
| STORE     | every cell → its MEFET, all banks | 1 | – |
| SLEEP     | STORE, then power-gate all banks | 2 | `asleep` |
| WAKE      | power up, then restore all banks | 2 | – |

While the slice is asleep, any other command first triggers the wake-up.
`cmd_ready` stays low for the two cycles of power-up and restore, and then
the command runs. Data written at any time before a SLEEP survives the
power-off. Data written after a STORE but before the next store is lost
only if power disappears without a SLEEP.

The controller exports counters of stores, power-downs, wake-ups and stalled
cycles.

## 5. Binarised layers: transpose buffer and DPU

The transpose buffer takes 64 words from the bus and hands out column *j*
as a word. This lets the bits of one operand sit down a bit-line.

The DPU accumulates the popcount of each XNOR_ACC result and the number of
bits seen. From these it forms:

* the bipolar dot product `2*ones - bits`;
* batch normalisation `gamma*dot + beta`, with gamma and beta in signed 8.8;
* a sign activation;
* a ReLU quantised to 8 bits with saturation.

Only the names of these units are given. The fixed-point formats are this
design's choice.

**Workload fit.** The evaluation workload is the five convolution layers of
a binarised AlexNet. Its binary weights (layer shapes of the standard
AlexNet, 2.33 M weights) take about 285 KB. Its largest binary activation
map (55x55x96) takes about 35 KB. Both fit in the 2,560 KB slice many times
over.

## 6. How far to trust it, and where it departs

Taken from the published design:

* the cell's control lines and their meaning;
* the store/restore polarity;
* Ron, Roff, Rref, the 20 ps switching and 200 ps read-out delays, and the
  50 ps restore;
* the RBL levels;
* the SA structure and its configuration table;
* single-cycle X(N)OR;
* the 256 x 256 sub-array, 2 x 8KB matrix, 2 x 16KB bank and 80 banks in
  20 ways;
* the 4:1 and 2:1 muxes;
* the existence of a control unit with command decoder and timing control,
  a transpose buffer, and a quantisation / activation / batch-norm unit.

This design's own choices:

* the 8-bit RBL scale and the reference values;
* the interleaved column mux;
* keeping the unselected columns of a written row;
* store and restore acting on the whole array in one cycle, and power-off
  clearing the volatile nodes;
* the command set, handshake, auto-wake and address map;
* the transpose buffer size;
* every arithmetic format of the DPU.

Not modelled:

* analog behaviour: sneak currents, noise margins, process variation, energy;
* the MEFET's LLG magnetisation dynamics;
* cache tags and replacement. The 20 ways are only an address field.
* The "chunks" drawn inside a 16KB matrix are not modelled as a separate
  level.

## 7. Simulating

Every file has a self-checking testbench in `tb/`, which prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    --top-module tb_mesram_subarray rtl/mesram_pkg.sv tb/tb_mesram_subarray.sv
./obj_dir/Vtb_mesram_subarray
```

Swap in `tb_sense_amp`, `tb_mefet_model`, `tb_me_sram_cell`,
`tb_mesram_matrix`, `tb_mesram_bank`, `tb_mesram_ctrl`, `tb_transpose_buffer`,
`tb_mesram_dpu` or `tb_mesram_top` as the top module.

The sub-array, matrix and bank testbenches run at full size.

`tb_mesram_top` runs the whole slice end to end at 1 way x 2 banks with
32 rows per sub-array. It covers read, write, XOR, XNOR, accumulate,
transposed write, store, sleep, stalled auto-wake and explicit wake, and
checks that each of them happened. That is the largest slice simulated.
The full 80-bank slice holds 42 Mbit of cell state and 81,920 sense
amplifiers. Verilator needs on the order of 15 minutes and 10 GB just to
lint it (measured: 149 s at 8 ways, 327 s and 3.7 GB at 12 ways), and
a full-size simulation build was not attempted.

Parameters to change the size: `N_WAYS`, `N_BANK_WAY`, `ROWS`, `COLS` and
`COL_MUX_N` on `mesram_top`. The address fields in `mesram_pkg` are sized for
the defaults.
