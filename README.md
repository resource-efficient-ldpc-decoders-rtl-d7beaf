# A partially-parallel LDPC decoder for 3-level hierarchical quasi-cyclic codes

This is synthesizable SystemVerilog for a low-density parity-check (LDPC) decoder for a
rate-1/2, (3,6)-regular code of 2304 bits, the WiMax frame size. The code comes from a
three-level hierarchical quasi-cyclic construction with layered permutation (3L-HQC-LP).
The decoder has 96 variable nodes and 96 check nodes working in parallel. The same nodes
are used again and again over one frame:

* a **variable-node phase (VNP)** of J = 24 clocks,
* then a **check-node phase (CNP)** of K = 12 clocks,
* plus 6 clocks of pipeline latency,

for **42 clocks per iteration**. Decoding stops when every parity check holds, or after 10
iterations.

The code structure is what keeps the hardware small. In one clock, 96 variables (or 96
checks) reach their messages in one word of each of a few small RAMs. The routing between
column order and check order is a fixed 6-way block select plus a 16-position rotation. A
small look-up table (the PMMB) supplies both. No general crossbar is needed.

## 1. The code

The parity-check matrix H (1152 rows by 2304 columns) is built in three levels:

| level | name | size | what it is |
|---|---|---|---|
| 1 | core matrix | 3 x 6 | all ones: column weight 3, row weight 6, rate 1/2 |
| 2 | L blocks | N x N blocks of R x R | element (i,j) of the core becomes an N x N block-diagonal array. It is circularly shifted by `LSHIFT[i][j]` (mod N), and its non-zero blocks are the Permuted matrix R_x with x = `RSEL[i][j]` |
| 3 | base matrices | P x P | each non-zero entry `I_s` of a Permuted matrix becomes the P x P identity circularly shifted by s |

The defaults are N = 4, R = 6 and P = 16, so 3·6·4·6·16 = 6912 edges. Changing N gives the
other lengths of the same family: N=1 is 576 bits, N=2 is 1152, N=3 is 1728.

Index conventions, used in the RTL and the reference model alike:

```
variable  c = ((j*N + n)*6 + r)*P + p     j: core column, n: block column, r: column in R, p: position in I
check     h = ((i*N + m)*6 + a)*P + q     i: layer (core row), m: block row, a: row in R,  q: position in I
edge (h,c) exists  iff  n = (m + LSHIFT[i][j]) mod N,  r = RCOL[x][a],  p = (q + RSHF[x][a]) mod P,
                        with x = RSEL[i][j]
```

The three Permuted matrices (6 x 6, one non-zero `I_s` per row and column) are in
`ldpc_pkg`:

| row a | R_0: column, shift | R_1: column, shift | R_2: column, shift |
|---|---|---|---|
| 0 | 0, 1 | 1, 2 | 2, 1 |
| 1 | 2, 3 | 3, 4 | 4, 5 |
| 2 | 4, 5 | 0, 1 | 1, 4 |
| 3 | 5, 6 | 5, 6 | 5, 3 |
| 4 | 3, 4 | 4, 5 | 3, 6 |
| 5 | 1, 2 | 2, 3 | 0, 2 |

Two tables are this design's own, because the construction leaves them open:

* **`RSEL`**: element (i,j) uses R_((i+j) mod 3). Each layer uses the three matrices in a
  different order.
* **`LSHIFT`**: the Level-2 shifts, which differ between layers:

  | layer | shifts |
  |---|---|
  | 0 | 0 1 2 3 0 1 |
  | 1 | 0 2 1 3 1 0 |
  | 2 | 0 3 1 2 2 3 |

Both choices matter.

* If a layer used one Permuted matrix for all six core columns, a path through H would
  never change r or p. The 2304-bit code would then fall apart into 96 independent 24-bit
  codes. An earlier version of this design did exactly that, and it could not even clear
  erasure-only frames.
* If the Level-2 shift depended only on the core column, it would only renumber columns,
  and the code would split into N independent codes.

The design has not been checked for girth or BER against any published curve (see §7).

## 2. Where the messages live

Each edge carries two messages:

* a check-to-variable message, kept in **B_V**;
* a variable-to-check message plus the variable's hard decision, kept in **B_C**.

Each store is **18 RAMs**, one per core element (i,j). Each RAM has N words of 96 entries.
Word n of RAM (i,j) holds the entries of the 96 edges of block column n, in column order
(index r·P + p).

With this split, no RAM is accessed twice in a clock:

* a VNP step (core column j, block column n) reads word n of the three RAMs (0..2, j);
* a CNP step (layer i, block row m) reads or writes word (m + LSHIFT[i][j]) mod N of the
  six RAMs (i, 0..5).

Check order needs a permutation. The CNPU does it on its way out of B_C. The VNPU undoes
it on its way into B_V:

```
check (a,q) of core column j  <-  entry  RCOL[x][a]*P + (q + RSHF[x][a]) mod P,   x = RSEL[i][j]
```

That is a 6:1 select of a 16-entry block followed by a rotation, for each of the six rows
of the Permuted matrix. The PMMB (`pmmb`) supplies these tables and the six word addresses
for any (layer, block row). It has two ports, because the CNPU read and the VNPU write of
the same phase are three clocks apart and may belong to different layers.

## 3. One iteration, clock by clock

Both phases are four-stage pipelines:

| stage | VNP step (j,n) issued at t | CNP step (i,m) issued at t |
|---|---|---|
| t | read B_V words (3 RAMs) and the IMB word j·N+n | PMMB port a gives addresses; read B_C (6 RAMs of layer i) |
| t+1 | select core column j; IMB output register | select layer i, permute to check order, register |
| t+2 | 96 variable nodes, registered | 96 check nodes, registered |
| t+3 | write 3 words into B_C; write 96 hard decisions into the frame buffer | PMMB port b; un-permute, write 6 words into B_V; parity result to the controller |

Steps are issued back to back, so a phase of J steps ends its last write at J+2. The next
phase starts reading at J+3. One iteration is therefore J + K + 6 clocks:
24 + 12 + 6 = 42 at 2304 bits.

`vnp_active` and `cnp_active` are high for the J and K issue clocks. A simpler timing
picture would put each write in the slot right after its read. Here two registers sit
between them (route, then node), so a write lands three clocks after its read. Only the
total is pinned down: 6 clocks of latency per iteration.

The controller takes the stop decision in the last clock of CNP. It ORs that clock's
parity result into the running flag, so stopping early costs no extra clock.

## 4. Arithmetic

| item | format | range |
|---|---|---|
| channel LLRs | 4-bit two's complement (positive means bit 0) | -8 .. 7 |
| messages | 3-bit sign-magnitude | -3 .. 3; zero is always written as +0 |

**Variable node** (`vn_array`):

```
total    = LLR + c2v_0 + c2v_1 + c2v_2
v2c_i    = clamp(total - c2v_i, -3, 3)
hd       = total < 0
```

In iteration 1 the c2v inputs are forced to zero, so B_V never needs clearing.

**Check node** (`cn_array`) uses min-sum. The reply to input j has:

* sign: the product of the other five signs;
* magnitude: the smallest of the other five magnitudes (from min1, min2 and the index of
  min1).

It also XORs the six hard decisions that travel with the messages in B_C. One unsatisfied
check in a word raises `pc_fail`. The parity of the VNP's hard decisions is thus known by
the end of the following CNP. If it holds, the frame buffer already holds the answer.

## 5. Interface

`ldpc_decoder` has parameters `P` (16), `N` (4) and `MAX_ITER` (10). All signals are
synchronous to `clk`; `rst` is an active-high synchronous reset of the control state.

| signal | dir | width | meaning |
|---|---|---|---|
| `load`, `llr_in` | in | 1, 96x4 | while idle: one word of 96 LLRs per clock. Word w holds bits 96w..96w+95. 24 words make a frame. The word count restarts on `start` or after 24 words |
| `start` | in | 1 | decode the loaded frame; ignored while busy |
| `busy` | out | 1 | decoding or streaming out |
| `dec_ready` | out | 1 | rises when decoding ends; stays high until the next `start` |
| `iter_count`, `converged` | out | 4, 1 | iterations run; whether all checks held |
| `frame_valid`, `frame_addr`, `frame_data` | out | 1, 5, 96 | the decoded frame, 24 words streamed right after `dec_ready` rises |
| `vnp_active`, `cnp_active` | out | 1, 1 | phase strobes |

A frame costs 24 clocks to load, 1 clock for start, 42 clocks per iteration and 24 clocks
to stream out. Loading and streaming are not overlapped with decoding.

## 6. Files

| file | role |
|---|---|
| `rtl/ldpc_pkg.sv` | widths, types, the code tables (`RCOL`, `RSHF`, `RSEL`, `LSHIFT`), message helpers |
| `rtl/ldpc_decoder.sv` | top: controller + processor |
| `rtl/decode_controller.sv` | Decode Controller: load addressing, VNP/CNP sequencing, stop rule, frame streaming |
| `rtl/decode_processor.sv` | Decode Processor: the two pipelines, the PMMB and the decoded-frame buffer |
| `rtl/vnpu.sv`, `rtl/cnpu.sv` | processing units with B_V and B_C (18 RAMs each) and the routing |
| `rtl/vn_array.sv`, `rtl/cn_array.sv` | the 96 variable and 96 check nodes |
| `rtl/imb.sv` | intrinsic message block (24 words x 96 LLRs) |
| `rtl/pmmb.sv` | code look-up tables, two ports |
| `rtl/msg_ram.sv` | block RAM model: one write port, one registered read port |

Memory at the defaults, 59,904 bits in all:

| store | size | bits |
|---|---|---|
| B_V | 18 x 4 x 288 | 20,736 |
| B_C | 18 x 4 x 384 | 27,648 |
| IMB | 24 x 384 | 9,216 |
| frame buffer | 24 x 96 | 2,304 |

## 7. Departures and open points

What this RTL takes as given, and what it had to choose:

* **Taken as given:**
  * the block structure: controller; processor with VNPU + B_V, CNPU + B_C, VN, CN, IMB
    and PMMB;
  * 96 parallel nodes;
  * the VNP then CNP schedule;
  * J = CodeLength/96 and K = Rate·CodeLength/96;
  * 6 clocks of latency per iteration (42 at 2304 bits);
  * stop on parity or on the iteration limit;
  * the three 6 x 6 Permuted matrices;
  * P = 16, R = 6, N = 4.
* **Check rule.** The original check-node algorithm is a "modified min-sum" that is only
  named. Plain min-sum is used, with no offset or scaling.
* **Widths.** Message width (3 bits) and LLR width (4 bits) are chosen. Three bits per edge
  matches a 20,736-bit message memory (6912 x 3). This design keeps two message stores, and
  B_C adds a hard-decision bit, so it uses more message memory than that.
* **Code tables.** `RSEL` and `LSHIFT` are chosen (§1). The real code's tables are unknown,
  so bit-error-rate results of the original cannot be reproduced with this RTL.
* **Throughput.** The iteration limit of 10 is the one used for the software model. Load,
  start and output handshakes are this design's. There is no double buffering of the IMB or
  the frame buffer, so sustained throughput is below `Rate·CL·f / (iterations·42)`.
  Example: with 7.5 average iterations a frame takes about 7.5·42 + 49 = 364 clocks.
* **Code length.** The length is fixed when the design is built, through `N`. One build does
  not switch between 576, 1152 and 2304 bits at run time.
* **Parallelism.** Only 96-way parallelism is built. The 16-, 48- and 144-node variants would
  need a different step grouping.
* **Other code lengths.**
  * Rate-1/2 codes with R = 6 need only a different `N` parameter.
  * Other WiMax lengths (R = 7..11) need Permuted matrices that were never given.
  * WLAN (P = 18) and DVB-S2 configurations, and rates other than 1/2, need other core
    matrices.

## 8. Simulation

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and has a watchdog. Run one
with Verilator 5 from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/ldpc_pkg.sv tb/ldpc_ref_pkg.sv \
          tb/tb_ldpc_full.sv --top-module tb_ldpc_full -Mdir obj && ./obj/Vtb_ldpc_full
```

**Reference model.** `tb/ldpc_ref_pkg.sv` rebuilds H edge by edge from its own copy of the
tables. It then runs the same arithmetic as flooding min-sum on the edge list. It also
computes a reduced row echelon form of H over GF(2), which lets it draw random non-zero
codewords.

**End-to-end tests.**

* `tb_ldpc_full` runs the default 2304-bit decoder.
* `tb_ldpc_decoder` runs P=4, N=2 (288 bits).
* `tb_ldpc_576` runs the 96-node decoder with N=1, the 576-bit WiMax frame (15 clocks per
  iteration).

All three share `tb/ldpc_tb_body.svh`. Each frame is a codeword sent with some amount of noise:

* no noise;
* triangular noise of growing width;
* pure noise.

For every frame the tests compare with the reference model:

* the decoded bits;
* the iteration count;
* the converged flag;
* exactly 42 (or J+K+6) clocks per iteration;
* J and K active clocks per phase.

Each test fails unless all three stopping cases happened at least once: parity after one
iteration, parity after several, and the iteration limit.

**Block tests.** `tb_pmmb`, `tb_msg_ram`, `tb_imb`, `tb_vn_array`, `tb_cn_array`, `tb_vnpu`
and `tb_cnpu` check their units at small sizes, against tables, integer rules or the
reference edge list. `tb_decode_processor` drives the processor one iteration at a time.
`tb_decode_controller` drives the controller against a stand-in for the processor.

To change the code, edit the tables in `ldpc_pkg.sv` and the copies in `ldpc_ref_pkg.sv`
and `tb_pmmb.sv` together: `tb_pmmb` and the end-to-end tests fail when the copies disagree.
