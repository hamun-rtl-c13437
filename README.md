# Hamun: a ReRAM inference accelerator that keeps working while its cells wear out

ReRAM crossbars compute a matrix-vector product in place: weights are stored
as cell conductances, input bits drive the rows, and each column current is a
dot product. Large networks do not fit in the crossbars, so an accelerator of
this kind runs a network layer by layer and rewrites the crossbars with the
next layer's weights over and over. ReRAM cells survive only a limited number
of writes (here a mean of 2.5e9 with a 20 % spread), so that rewriting is what
ends the chip's life.

Hamun attacks the problem from four sides, and this RTL builds the hardware
side of each:

* **Detect wear-out where it happens.** Every row is written with program and
  verify (P&V): pulse, read back, repeat. A cell that will not move is stuck,
  and the APU reports where.
* **Retire, do not stop.** A faulty column is masked: it is no longer
  programmed, and it is skipped when results are read. The host decides when
  to retire (it may tolerate a few faults within an accuracy budget), and
  re-maps the layers around masked columns.
* **Spread the writes.** Within a crossbar, the four 2-bit cells of a weight
  swap roles every inference (the cell holding the often-changing low bits
  moves), and the first written row moves down by one every inference.
* **Make transformers cheap.** The key matrix of attention is needed
  transposed. A dedicated bank group of the global buffer stores it in
  transposed order as it is produced, so no transposition pass is needed.

Scheduling (which layer goes where, batching of inferences, the fault budget)
is host software and is not part of this RTL; the chip takes one command at a
time on its ports.

## Chip organisation

```
                 +------------------- hamun_chip --------------------+
 main memory --> | mm_*  -->+                                         |
                 |          | noc (16-byte lines) --> 64 x pe         |
 ext_gb_* ------>| global_buffer --gb_send_*-->+        |             |
 ext_rd_* <------|   normal_bank_group          res_* (output buffer) |
                 |   transpose_bank_group <-- sfu <-- acc_unit <------+
 tcfg_* -------->|                                                    |
 cmd_* --------->| pe_controller of the addressed PE                  |
 fault_* <-------| fault_monitor <-- fault records of every PE        |
                 +----------------------------------------------------+
```

| Level | Module | Contents |
|---|---|---|
| chip | `hamun_chip` | 64 PEs, network, 8 MB global buffer, ACC, SFU, fault monitor |
| PE | `pe` | 6 x 4 APUs, one 1.5 KB buffer per PE row, a shared shift register set, the ADD array, the output buffer, the PE controller |
| APU | `apu` | one 128 x 128 crossbar, input/write/mask registers, P&V write logic, 16 ADCs, accumulators |
| cell array | `reram_crossbar` | behavioural model of the 1T1R array with its drivers and sample-and-hold |

A **PE row** (4 APUs sharing one buffer) is the smallest unit a layer is
mapped to. All APUs of a PE row see the same input activations; each holds
different output neurons. Rows of a PE that hold the same layer are summed in
the ADD array, and PEs that hold the same layer are summed in the ACC.

## Numbers

| Quantity | Value | Origin |
|---|---|---|
| PEs | 64 | paper |
| APUs per PE | 6 x 4 | paper |
| crossbar | 128 x 128 cells, 2 bits each | paper |
| weight | 8 bits = 4 cells, so 32 weights per row | paper |
| ADCs per APU | 16, 6 bits | paper |
| crossbar computation | 96 cycles | paper |
| crossbar row write | 6000 cycles | paper |
| PE buffer | 1.5 KB = 96 lines of 16 bytes | paper (size); line width from the 128-bit links of the PE diagram |
| global buffer | 8 MB, of which 32 KB is the transposing group | paper (8 MB); split chosen here |
| network transaction | 16 bytes | paper |
| endurance | mean 2.5e9, coefficient of variation 0.2 | paper |
| clock | 1 GHz (all latencies here are in cycles) | paper |
| activations | signed 8 bit; weights unsigned 8 bit; sums 24 bit | chosen here |
| output buffer | 16 entries of 4 x 32 sums | chosen here |

All of these are parameters or `hamun_pkg` constants, with the paper's values
as defaults.

## Inside the APU

### Weight layout and wear leveling

Weight `k` of a row occupies columns `4k .. 4k+3`. With the inference counter
`n` (kept by the PE controller, advanced by `inf_tick`):

* cell `q` of the weight holds bit pair `(q + n) mod 4` of the weight
  (bits `2s+1:2s` with `s = (q + n) mod 4`);
* logical row `l` is stored in physical row `(l + n) mod 128`.

Both offsets are latched when a row write starts and are used by the
computation that follows, so results do not depend on `n`; only the physical
placement does. Rows a layer leaves unused therefore get their turn, and the
low-order bit pairs, which change most from layer to layer, visit every cell.

### Writing a row (program and verify)

`wr_start` writes the 32 weights of the write register into one row in
`ROW_WR_CYC` (6000) cycles, whatever the data; all APUs of a PE row write in
parallel. The window is split into two phases, *increase* then *decrease*,
matching the two programming polarities. Each phase has `PV_PULSES` (3) slots
spread evenly over its half of the window. In each slot the row is read
(verify), every column below its target level (increase phase) or above it
(decrease phase) has its source-line driver enabled, and one pulse is applied
in the middle of the slot. Masked columns never get a pulse. Three pulses per
phase are enough for a full swing of a 2-bit cell when each pulse moves it by
one level, which is how the cell model behaves.

At the end of the window every unmasked column is compared with its target.
A column that did not arrive holds a stuck cell: `fault_valid` pulses with
`wr_done`, carrying the physical row and a 128-bit vector of failing columns.

### Computing

The input register holds one bit plane of the 128 activations (one bit per
crossbar row, permuted by the row offset). Per plane:

1. 4 cycles: word lines driven, column currents settle and are sampled;
2. 8 cycles: the 16 ADCs convert the 128 sampled columns, ADC `a` taking
   column `16g + a` at step `g`; each 6-bit code is shifted by its cell's bit
   pair weight (`2s`) and by the plane index, and added into the weight's
   accumulator. The MSB plane is subtracted (two's complement activations).
   Masked columns contribute nothing.

8 planes x 12 cycles = 96 cycles, the crossbar computation latency. A column
sum above 63 saturates in the ADC, as a 6-bit converter would; with 128 rows
of 3-level cells this can happen when more than 21 full cells are driven.

## The PE and its commands

The PE controller executes one command at a time (`cmd_valid`/`cmd_ready`).

| Command | Effect | Cycles from acceptance to `cmd_ready` |
|---|---|---|
| `OP_SET_MASK` | load the 128-bit column mask of APU (`pe_row`, `pe_col`) | 0 (done in the accepting cycle) |
| `OP_WRITE_ROW` | read 8 lines from the buffer of `pe_row` at `buf_addr` (2 lines = 32 weights per APU), load the 4 write registers, write logical row `xb_row` in all 4 APUs | 2*4 + 3 + 6000 |
| `OP_COMPUTE` | feed bit planes from lines `buf_addr .. buf_addr+7` of every PE row in `row_en`, sum the rows in the ADD array, store 4 x 32 sums in output buffer entry `out_addr` | 2 + 96 + 3 = 101 |

Lines arrive from the network with a kind: `LK_DIRECT` lines (weights) go
straight into the addressed buffer line; `LK_ACT` lines (16 activations each)
go through the shift register set, which after 8 lines (128 activations)
writes the 8 bit planes into lines `in_addr .. in_addr+7` of the addressed
buffer.

## Transposing bank group

The key matrix K (N tokens x M features) is produced one row per token and
arrives as 16-byte transactions of consecutive elements of a row. Element
`alpha = r*M + c` belongs at position

    P(alpha) = N * alpha mod (M*N - 1)   (and P = M*N - 1 for the last element)

of the row-major transposed matrix; this equals `c*N + r`. The element goes to
bank `P mod 16`, entry `P div 16`. Reading entry `e` then returns transposed
elements `16e .. 16e+15` in bank order: K^T comes out line by line.

The hardware keeps `r` and `c` in counters (`tcfg_*` sets N and M and resets
them) and computes `P = c*N + r` for each of the up to 16 lanes. The swapping
register routes each lane to its bank. When N is odd, the 16 lanes of a
transaction always land in 16 different banks and are written in one cycle.
When N is even, some lanes collide; then the register drains over several
cycles, writing in each cycle the lowest pending lane of every bank, and
holds off the next transaction meanwhile. Those cycles are counted on
`tbg_conflict_cycles`. The description this design follows assumes every
transaction is written at once and does not address the collision.

## Results: ACC, SFU, global buffer

`res_*` moves one line of results: 16 sums from output buffer entry
`res_addr` of PE `res_pe` (APU column `res_col`, half `res_half`) through the
ACC, which adds them to a running sum opened by `res_first` and closed by
`res_last` (to add the same outputs across PEs), then through the SFU
(optional ReLU, arithmetic shift right by `sfu_shift`, saturation to signed
8 bits, optional max pooling over `pool_len` successive lines), into global
buffer line `res_dst_addr` (transposing group if `res_dst_sel`). One request
is taken every 4 cycles.

## Faults and halting

The APUs of a PE queue their fault records in the PE; the fault monitor
collects records from all PEs round robin, tags them with the PE number and
queues them (8 entries) for the host on `fault_*`. The first record raises
`halt`, which blocks every PE command port after the running command. The
host reads and pops the records, decides whether to retire the faulty
columns (by `OP_SET_MASK` and a new mapping) or to tolerate them, and pulses
`resume`; `halt` falls once the queue is empty.

## What is modelled and what is missing

* `reram_crossbar` and `adc` are behavioural models of analog parts. The
  crossbar keeps a 2-bit level and a pulse count per cell; each programming
  pulse moves a cell by one level until its endurance is used up, after
  which it is stuck. Endurance is drawn from a hash of the cell position and
  the instance's seed as a uniform spread with the same mean and standard
  deviation as the normal distribution used in the paper's evaluation.
  Column currents are exact integer sums; there is no noise or IR drop.
* The network is a single-stage switch from two sources (main memory side and
  global buffer) to the PEs with round-robin arbitration, not a mesh with
  routers.
* The SFU has ReLU, requantisation and max pooling; sigmoid and normalisation
  are not built.
* The external memory interface is not built: its traffic enters and leaves
  through the chip's `mm_*`, `ext_gb_*` and `ext_rd_*` ports. The host
  scheduler (mapping, batching, fault budget) is software.
* A PE executes one command at a time, so the four-APU PE rows of one PE
  write their rows one after another (6000 cycles each); PE rows of
  different PEs write in parallel. The paper has all crossbars write at
  once.
* A row write always takes the full 6000-cycle window, the paper's figure
  for the slowest cell; the real write time would depend on the data.
* The mask is loaded with its own command, whereas the paper fetches it
  together with the first row of a write.
* The swapped placement in the paper's small transposition example does not
  follow its bank equation; the equation is what is built. The bank diagram
  labels its last bank "Bank16", which would make 17 banks; 16 are built, as
  the text says.

## Simulating

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
  --top-module tb_apu rtl/hamun_pkg.sv tb/tb_apu.sv
./obj_dir/Vtb_apu
```

| Testbench | What it covers |
|---|---|
| `tb_reram_crossbar`, `tb_adc` | cell model: pulses, verify, column sums, wear-out; ADC clipping |
| `tb_apu` | row writes with rotation and row shift (checked on the cell levels), 96-cycle computation against a reference, masking, ADC saturation, wear-out faults |
| `tb_pe_buffer`, `tb_shift_register_set`, `tb_add_array`, `tb_output_buffer` | PE storage and data path pieces |
| `tb_pe_controller` | command sequencing and latencies against APU stand-ins |
| `tb_pe` | a 256-input x 128-output layer on two PE rows, masking, fault reporting |
| `tb_transpose_bank_group` | K^T read-back for several N x M including even N (collisions) |
| `tb_normal_bank_group`, `tb_global_buffer`, `tb_acc_unit`, `tb_sfu`, `tb_noc`, `tb_fault_monitor` | the chip-level blocks |
| `tb_hamun_chip` | end to end on a 2-PE chip with 60-cycle row writes and low endurance: transposed key write, weight writes, masking, both network sources, computation, ACC over two PEs, SFU, pooling, a second inference with rotated and shifted rows, wear-out, halt and resume; counts each of these and fails if one never happens |

Testbenches that shorten the row write or lower the endurance do so through
the `ROW_WR_CYC_P` and `ENDURANCE_MEAN` parameters; the logic is the same.

There is no testbench of the whole chip at its default size. Verilator turns
64 PEs of 24 crossbar models (each with 16,384 cells and their wear counters)
and the 8 MB buffer into C++ that takes well over ten minutes to compile on a
4-core machine, before a single cycle runs. The largest configurations
simulated are: one complete PE (6 x 4 APUs, full 128 x 128 crossbars, full
buffers) in `tb_pe`, and the whole chip with 2 PEs, a 256-line global buffer
and 60-cycle row writes in `tb_hamun_chip`. At full size, `tb_apu` also writes
one row of an APU left at its default parameters and checks that the write
takes 6000 cycles and leaves the rotated, shifted bit pairs in the cells.
