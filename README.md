# A logic die for online reinforcement learning on a small drone, with a read-only STT-MRAM weight stack

A drone that learns to avoid obstacles from its camera has to train its Q-network
while it flies, at least as fast as frames arrive. The network here is a modified
AlexNet (5 convolution layers, 5 fully connected layers, 52.4 M weights, five
output actions). Its weights are too many for on-die SRAM, so they would normally
live in a dense non-volatile memory such as STT-MRAM. STT-MRAM, however, is slow
and costly to write (30 ns and 4.5 pJ/bit against 10 ns and 0.7 pJ/bit for a
read), and a full backpropagation would rewrite every weight after every batch.

The way out is transfer learning followed by online learning of the last layers
only:

* the network is trained beforehand on meta-environments;
* every layer that stays fixed in flight (CONV1-CONV5, FC1, FC2, about 100 MB)
  goes into a 3D-stacked STT-MRAM that is **only read** during flight;
* the layers that keep learning (FC3, FC4, FC5: 6.3 M weights, 12.6 MB), the
  running sums of their gradients (12.6 MB) and a 4.2 MB scratchpad sit in a
  29.4 MB on-die SRAM global buffer, so **every write caused by learning lands in
  SRAM**.

The compute is a 32 x 32 systolic array of processing elements (PEs) fed by that
global buffer. This repository gives SystemVerilog for the logic die (the PE and
its parts, the array, the global buffer, the weight mover, the frame loader and
the Q-learning unit) and a behavioural model of the STT-MRAM stack, each with a
self-checking testbench.

## 1. Block map

```
  pixel stream ──► frame_loader ──┐            (fill port, mover has priority)
                                  ├──► global_buffer  57,420 x 4096 bit
 stt_mram_stack ──► mram_dma ─────┘          │ array port
 (behavioural,  2048 bit/clk                 │ read word ──► broadcast bus (slice c → column c)
  10-clk read, 30-clk write)                 │           ──► north edge  (slice c → column c)
                                             │           ──► west edge   (slice r → row r)
                                             │           ──► q_unit (slice 0, lanes 0..4)
                                             ▼
                                pe_array 32 x 32 ── row 0 accumulators ──► buffer (GB_WR_NORTH)
                                                 ── last column accs  ──► buffer (GB_WR_EAST)
                                q_unit error vector ────────────────────► buffer (GB_WR_QERR)
```

| module | role |
|---|---|
| `rl_pkg` | number format, link word type, micro-operations, buffer and Q-unit operations |
| `pe_rf` | 288 x 128-bit register file of one PE (4.5 KB) |
| `pe_alu` | 8 MAC lanes + adder tree + 8 comparators |
| `pe_ctrl` | per-PE control unit: decodes the micro-operation |
| `pe` | one PE: RF, ALU, control, the X vector register and 8 accumulators |
| `pe_array` | 32 x 32 PEs and their links, row/column masks, edge ports |
| `global_buffer` | the 29.4 MB SRAM, 4096-bit words, two ports |
| `stt_mram_stack` | behavioural model of the stacked STT-MRAM |
| `mram_dma` | copies weights from the stack into the buffer |
| `frame_loader` | packs a camera frame into buffer words |
| `q_unit` | action selection and Bellman error |
| `drone_rl_soc` | the top: everything above wired together |

## 2. Numbers

Every activation, weight, gradient and partial sum is 16-bit signed fixed point.
The design uses Q8.8 (8 fraction bits). A product is the full 32-bit product
shifted right by 8 (rounding toward minus infinity) and clamped to 16 bits; every
sum clamps too. The eight products of a dot product are summed at full precision
and shifted once. The Q8.8 split and the rounding are this design's choice; only
"16-bit fixed point" is given.

A link word is 128 bits = 8 lanes of 16 bits, matching the 8 MACs of a PE.

## 3. The processing element

Each PE holds:

* **RF**: 288 words of 128 bits (4.5 KB), one write port and two combinational
  read ports (`addr_a` gives an 8-lane operand, `addr_b` a word whose lane
  `lane` is a scalar);
* **X**: a 128-bit vector register that travels through the array one PE per
  clock: east along a row, south down a column, west along a row, or to the
  upper-right neighbour (the diagonal link);
* **ACC**: eight 16-bit accumulators, which are what partial sums (pSUMs) are
  built in and what leaves the array;
* **ALU**: 8 multipliers shared by two MAC forms, an adder tree, and 8
  comparators for ReLU and maxpool.

Every clock the whole array receives one micro-operation `cmd` plus a row mask
and a column mask; a PE executes it when both its row bit and its column bit are
set. Neighbour inputs are the neighbours' *registered* X and ACC, so a transfer
always takes exactly one clock per hop, and a chain of dependent transfers is a
sequence of commands. There is no handshake anywhere in the array: the schedule
is the controller's.

### Micro-operations (`rl_pkg::pe_op_e`)

| op | effect in an enabled PE |
|---|---|
| `PE_RF_WR_BUS` | RF[a] ← broadcast word of this column |
| `PE_X_SH_E` / `_S` / `_W` | X ← X of west / north / east neighbour (vector moves east / down / west) |
| `PE_X_SH_DIAG` | X ← X of lower-left neighbour (moves to the upper right) |
| `PE_X_LD_RF`, `PE_X_ST_RF`, `PE_X_LD_ACC` | X ← RF[a]; RF[a] ← X; X ← ACC |
| `PE_ACC_CLR`, `PE_ACC_LD_RF`, `PE_ACC_ST_RF` | ACC ← 0; ACC ← RF[a]; RF[a] ← ACC |
| `PE_MAC_X` | ACC[k] += X[lane] · RF[a][k] (scalar × vector) |
| `PE_MAC_RF` | ACC[k] += RF[b][lane] · RF[a][k] |
| `PE_DOT` | ACC[lane] += Σ_k X[k] · RF[a][k] |
| `PE_PS_ADD_S` | ACC += ACC of south neighbour (vertical pSUM step) |
| `PE_PS_ADD_W` | ACC += ACC of west neighbour (row-wise pSUM step) |
| `PE_PS_MOV_S` | ACC ← ACC of south neighbour (drain the array through row 0) |
| `PE_ACC_ADD_X` | ACC += X |
| `PE_RELU` | ACC[k] ← max(ACC[k], 0) |
| `PE_MAXP_RF` | ACC[k] ← max(ACC[k], RF[a][k]) |

Edges of the array: column 0 takes X from the west edge input of its row (also
for the diagonal move), row 0 from the north edge input of its column; missing
east X, south ACC and west ACC neighbours, and the diagonal input of bottom-row
PEs outside column 0, read as zero.

## 4. Dataflows as command sequences

The hardest part of the design to see from the RTL is how the paper's dataflows
become sequences of these micro-operations. The top-level testbenches
(`tb_drone_rl_soc`, `tb_pe_array`) are the working examples; the recipes are
below. `R` and `C` are the array's rows and columns. "Read word n" means a
command with `gb_op = GB_RD`; the word is on the broadcast bus and both edges
during the *next* command.

### FC forward, y = x·W (vector along rows, pSUMs up the columns)

PE(i, j) holds in RF the weights from input i to outputs 8j..8j+7.

1. For each row i: read weight word i, then `PE_RF_WR_BUS` with only row i
   enabled (the same buffer word is broadcast into one row; with all rows
   enabled it is broadcast to every row).
2. Read the input word (slice r lane 0 holds x_r); `PE_X_SH_E` C times: x_r has
   then crossed the whole of row r.
3. `PE_ACC_CLR`, `PE_MAC_X` (lane 0): PE(i, j) holds x_i · W[i][8j..8j+7].
4. `PE_PS_ADD_S` for row R-2, then R-3, ... down to row 0, one row per command:
   row 0 now holds Σ_i x_i W[i][·].
5. `GB_WR_NORTH`: the 256 outputs (32 columns × 8 lanes) go back as one word.

For longer input vectors the weights of input block t sit at RF address t and
the lanes of X carry 8 consecutive blocks; steps 2-3 repeat with `PE_MAC_X`
lane 0..7 before the single vertical accumulation.

### FC backpropagation, e = W·d (vector down the columns, pSUMs along the rows)

The weights stay exactly where the forward pass put them; no transpose is made.

1. Read the error word (slice c holds d[8c..8c+7]); `PE_X_SH_S` R times.
2. `PE_ACC_CLR`, `PE_DOT` (lane 0): PE(i, j) holds Σ_k W[i][8j+k]·d[8j+k].
3. `PE_PS_ADD_W` for column 1, 2, ... C-1, one column per command.
4. `GB_WR_EAST`: lane 0 of slice i holds e_i.

### Weight gradients and their sum over a batch

The weight gradient is the outer product of the layer input x and the error d.

1. Read the error word and `PE_RF_WR_BUS` with every row enabled (d broadcast to
   all rows, RF address g_d).
2. Move x along the rows (`PE_X_SH_E` × C).
3. `PE_ACC_LD_RF` (running gradient sum), `PE_MAC_X` (lane 0, address g_d),
   `PE_ACC_ST_RF`. Repeat 2-3 for each of the N images of a batch.
4. To hand the sums to the buffer, issue `PE_PS_MOV_S` together with
   `GB_WR_NORTH` R times: each command writes row 0 and moves every row up one.

### Weight update W ← W − η·G

Broadcast a word holding −η in lane 0 into RF (address g_η), then
`PE_ACC_LD_RF` (W), `PE_MAC_RF` (a = G address, b = g_η, lane 0), `PE_ACC_ST_RF`
(W). The new weights are used from the RF directly, and drained into the buffer
as above. The learning rate is not given; it is a buffer word the host chooses.

### Convolution, row-stationary

Each PE computes one 1-D row convolution: one filter row against one image row.
A segment of PEs as tall as the filter adds its rows' pSUMs vertically.

* Filter row r is broadcast from the buffer into the RF of every PE in PE row r
  of every segment (`PE_RF_WR_BUS` with a row mask, one RF word per filter tap;
  the 8 lanes are 8 output channels).
* Image rows enter at the west edge and travel diagonally (`PE_X_SH_DIAG`, C
  times). Afterwards PE(r, c) holds image row r + c, which is what a
  row-stationary mapping with stride 1 needs: PE(r, c) and PE(r−1, c+1) share
  an image row. (Strided layers load their rows through the broadcast bus.)
* Output position p: `PE_ACC_CLR`, then `PE_MAC_X` with lane p + t and RF
  address of tap t for every tap t; then `PE_PS_ADD_S` with the mask of the
  segment rows, bottom-up; `PE_RELU`; `PE_ACC_ST_RF` or `PE_MAXP_RF` to pool
  adjacent positions.
* Several segments run at once because a mask may select one row in every
  segment. The results of a lower segment reach row 0 with `PE_PS_MOV_S`.

The paper maps its layers as follows (the masks above are how this RTL forms the
partitions): CONV1 uses two segments of 11 × 32 PEs (Type I), CONV2 six
segments of 5 × 27 (Type II), CONV3-CONV5 two sets of ten 3 × 13 segments
(Type III). In Type III the two sets work on the two halves of the input
channels and the first-row results of set 2 must be added onto set 1. In this
RTL: `PE_X_LD_ACC` on row 0, `PE_X_SH_W` 13 times (the set width), then
`PE_ACC_ADD_X` on the columns of set 1.

## 5. Global buffer and the command port

`global_buffer` is one flat memory of 57,420 words of 4096 bits (29.4 MB). By
convention words 0-24,607 hold FC3-FC5, 24,608-49,215 the gradient sums and
49,216-57,419 the scratchpad. Reads take one clock. Port A serves the array;
port B is written by the weight mover and the frame loader. If both ports write
one word in the same clock, port A's data is kept.

`drone_rl_soc` executes, every clock that `cmd_valid` is high, one PE
micro-operation (`cmd`, `row_en`, `col_en`), one buffer operation (`gb_op`,
`gb_addr`) and one Q-unit operation (`q_op`). All three act at the same clock
edge and see the state before it: a `GB_WR_NORTH` written together with
`PE_PS_MOV_S` stores the accumulators as they were before the move, and a Q-unit
operation uses the word read by the *previous* command.

## 6. Weight stack, weight mover, frame loader

`stt_mram_stack` is a behavioural model (the real part is a stack of memory dies
on through-silicon vias). It has 1024 I/Os at 2 Gbit/s; at the 1 GHz clock this
is one 2048-bit beat per clock. A read returns exactly 10 clocks after it was
accepted, one read per clock; a write blocks the port for 30 clocks. It holds
390,625 beats (100 MB), enough for the 99.8 MB of CONV1-5, FC1 and FC2. The
`mram_load_*` port of the top writes the model into it before flight.

`mram_dma` copies n buffer words (2n beats, low beat first) and needs
2n + 11 clocks. It issues reads only: the main configuration never writes the
stack in flight.

`frame_loader` takes 16-bit pixels over a valid/ready stream and writes 256 of
them per buffer word; a 224 × 224 frame is 196 words. The mover has priority on
the fill port; while a packed word waits, the loader holds `pix_ready` low.

## 7. Q unit

`q_op = Q_SELECT` latches the five Q values (lanes 0-4 of slice 0 of the word
just read) and presents the action with the largest value on `action` (lowest
index on a tie). `Q_TARGET`, with the next frame's Q values, forms
target = r + γ·max Q(s′, ·) and the error vector err[a] = Q(s, a) − target in
the lane of the chosen action, zero elsewhere: the output-layer gradient of
½(Q(s,a) − target)². `GB_WR_QERR` stores it, ready for backpropagation. γ and r
are Q8.8 inputs. Exploration (random actions early on) is left to the host.

## 8. What fits

| workload | needed | built | fits |
|---|---|---|---|
| train FC3-FC5 (main) | 12.6 + 12.6 + 4.2 = 29.4 MB SRAM | 29.4 MB | yes |
| train FC4-FC5 | 4.2 + 4.2 + 4.2 = 12.6 MB | 29.4 MB | yes |
| train FC2-FC5 | 29.38 × 2 + 4.2 = 63 MB | 29.4 MB | no: FC2 would need stack writes |
| end-to-end training | 104.9 MB trainable | 29.4 MB | no (and the mover does not write) |
| frozen layers in the stack | 99.8 MB | 100 MB (assumed capacity) | yes |
| CONV1 filter + image row per RF | 185 words | 288 words | yes; a full 55-position pSUM row would add 165 words, so pSUMs leave in parts |
| one 224 × 224 frame | 196 words | 8,204 scratchpad words | yes |

## 9. How this differs from the source design

Built from the published description, at its sizes (32 × 32 PEs, 4.5 KB RF,
128-bit links, 4096-bit buffer port, 29.4 MB buffer, 1024 × 2 Gbit/s MRAM I/O,
10/30 ns MRAM latencies, 1 GHz, 16-bit fixed point, five actions). The following
are choices of this RTL, not of the source:

* the micro-operation set, the per-PE decode and the row/column masks;
* the Q8.8 format and its rounding;
* the RF organisation (128-bit words, 2 read ports) and the buffer's two ports;
* the direction of the diagonal link (to the upper right, as row-stationary
  reuse needs) and the edge rules of the array;
* the set-transfer route (through X, westward);
* the command port in place of a controller: no layer sequencer is given in the
  source, so the schedules of section 4 are supplied from outside;
* the weight mover, the frame stream handshake and the fill-port priority;
* the loss used by the Q unit and placing the Q unit on the die;
* one 16-bit value per pixel (colour channels are not modelled), 224 × 224
  frames (the source's mapping figure draws 227 × 227);
* the global buffer is sized by the text's 29.4 MB total; a parameter table in
  the source says 30 MB.

Not built: the camera and its DSP, the off-chip DRAM, the DDR link, the reward
computation (mean depth of a centre window), exploration, a sequencer, and the
GEMM-based convolution backpropagation, which only the end-to-end baseline uses.
Biases are not treated separately; a bias can be carried as the weight of a
constant-1 input.

## 10. Simulating

Every file in `rtl/` holds one module or package; `rl_pkg.sv` must be read first.
Each testbench prints `TB_RESULT checks=N failures=M` and stops itself.

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/rl_pkg.sv tb/tb_fx_pkg.sv rtl/*.sv tb/tb_drone_rl_soc.sv \
    --top-module tb_drone_rl_soc
./obj_dir/Vtb_drone_rl_soc
```

| testbench | what it checks |
|---|---|
| `tb_pe_rf`, `tb_pe_alu`, `tb_pe_ctrl` | RF contents, every ALU function against an independent fixed-point model, the decode table |
| `tb_pe` | 8,000 random micro-operations against a cycle model of a PE |
| `tb_pe_array` | 4 × 4 array: forward, transposed backpropagation, gradients, ReLU, maxpool, diagonal move, set transfer |
| `tb_global_buffer`, `tb_stt_mram_stack` | memory contents; MRAM 10-clock read, one read per clock, 30-clock write |
| `tb_mram_dma`, `tb_frame_loader` | copies and their 2n + 11 clock time; frame packing under random stalls |
| `tb_q_unit` | argmax, ties, target and error vector |
| `tb_drone_rl_soc` | reduced die (4 × 4 PEs): download, DMA and frame load at once, forward, action, error, backpropagation, batch gradient sums, weight update, forward again, two-segment convolution with ReLU/maxpool, set transfer; counts that every mechanism occurred |
| `tb_drone_rl_soc_full` | the die at full size: a 32 × 256 weight tile and a full 224 × 224 frame, one forward step of all 1024 PEs, action choice |

The testbench reference arithmetic (`tb_fx_pkg`) is written independently of
`rl_pkg`. With two-state simulation, unwritten RF and buffer words start at
random values; every testbench writes what it reads.
