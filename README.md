# AutoMM programmable-logic datapath: feeding an AI Engine array without bubbles

On a Versal-class device the AI Engine (AIE) array can do far more
arithmetic than one DDR channel can feed. 400 vector cores at 1 GHz sit
behind a single 25.6 GB/s DDR4 interface. A matrix multiply
C = A x B reaches the array's throughput only if three things hold:

- every operand byte brought on chip is reused many times;
- the few PL/AIE stream ports are shared by many AIEs;
- no AIE ever waits for data.

This RTL is the programmable-logic (PL) half of such an accelerator:

- the on-chip buffers that provide the reuse;
- the data movers that send operand TILEs to the AIE array as packets, in
  an order that keeps every AIE busy;
- the accumulators that collect partial results;
- the paths to and from off-chip memory.

The AIE array, its stream switches, the PL/AIE interface tiles, the NoC/DDR
and the host CPU are fixed silicon or software. They sit outside the RTL,
and their streams are ports of the top module (`automm_top`).

The design follows the published AutoMM architecture for multi-data-type
matrix multiply on the AMD VCK190. This text and the RTL are an independent
rendering: wherever the architecture left a choice open, the choice made
here is pointed out.

## 1. Four levels of tiling

The product is tiled on four levels, with the output stationary
throughout:

```
for m0, n0, k0   (off-chip)   load one LHS block and one RHS block
  for m1 < X, n1 < Z, k1 < Y  (PL reuse)   one BATCH per iteration
    for m2 < A, n2 < C, k2 < B  (AIE array, all parallel)
      one AIE computes one TI x TK x TJ TILE
```

| level | size | where it lives |
|---|---|---|
| TILE | TI x TK x TJ | one AIE's local memory |
| BATCH | (A*TI) x (B*TK) x (C*TJ) | the whole AIE array at once |
| block | (X*A*TI) x (Y*B*TK) x (Z*C*TJ) | the PL buffers |
| matrix | M x K x N | off-chip memory |

Inside the AIE array:

- The A*C AIE columns are indexed by (m2, n2).
- The B AIEs of one column each take one k2 slice of the reduction.
- Each AIE adds its product to the partial sum of the AIE below it. This is
  a read-after-write chain up the column.
- The top AIE of a column emits one TI x TJ output TILE per BATCH.

Within a block, BATCH number b stands for the reuse indices
`b = (m1*Z + n1)*Y + k1`:

- k1 runs fastest. Consecutive BATCHes with the same (m1, n1) therefore
  accumulate onto the same output TILE.
- The PL adds those up over k1, and over k0 across blocks.

Default configuration (parameters of `automm_top`):

| parameter | default | meaning |
|---|---|---|
| `DTYPE` | `DT_FP32` | input type: `DT_FP32`, `DT_INT16` or `DT_INT8`; outputs are FP32 or INT32 |
| `TI`, `TK`, `TJ` | 32, 32, 32 | TILE size |
| `A`, `B`, `C` | 1, 4, 4 | AIE columns in m, AIEs per column (k), AIE columns in n: a 4 x 4 array |
| `X`, `Y`, `Z` | 2, 2, 2 | BATCHes per block in m, k and n |
| `BF_L`, `BF_R` | 2, 1 | broadcast factors of the LHS and RHS ports |
| `CW` | 16 | width of the outer-loop counts |

At these defaults:

- A block is 64 x 256 (LHS) by 256 x 256 (RHS).
- M must be a multiple of 64, and K and N multiples of 256.
- The buffers take 6 Mbit of RAM in 64-bit words:
  - LHS: one partition of 2 x 8192 words.
  - RHS: four partitions of 2 x 8192 words.
  - Output: four columns of 2 x 2048 words.

The 4 x 4 array and the 32x32x32 TILE are the architecture's worked
example. The evaluated designs used 384 (FP32), 288 (INT16) and 192 (INT8)
AIEs, but the split of those numbers into A, B and C was not published. The
X/Y/Z values are this design's choice.

## 2. The bubble-free order: the hard part

Each AIE holds two local-memory banks for its LHS and RHS TILEs (ping-pong).
Two rules govern when a TILE can arrive and when an AIE can compute:

- **Arrival.** TILE n of an AIE can only be written once TILE n-2 has been
  consumed.
- **Compute.** The AIE in row r can compute BATCH n only after row r-1 has
  finished BATCH n. This is the read-after-write chain.

So row r starts its first BATCH r compute periods after row 0. One PLIO
port feeds all B rows of a column in turn: the packet header selects the
row. A TILE transfer takes about 1/B of a compute period; the worked
example has a compute-to-communication ratio of 4 with B = 4.

### Why lexicographic order stalls

The obvious order is lexicographic by (BATCH, ID): all rows of BATCH 0,
then all rows of BATCH 1, and so on. It jams:

1. Row 2 receives BATCH 0 and BATCH 1 early.
2. It cannot start BATCH 0 until rows 0 and 1 are done, so its banks stay
   full.
3. The BATCH 2 packet for row 2 blocks the shared port.
4. Row 0, which is ready, starves.

### The wavefront order

The order used here sends only what is needed in the next compute period.
The pairs go out on anti-diagonal wavefronts d = BATCH + ID, with ID
ascending inside a wavefront:

```
d=0: (0,0)
d=1: (1,0) (0,1)
d=2: (2,0) (1,1) (0,2)
d=3: (3,0) (2,1) (1,2) (0,3)
d=4: (4,0) (3,1) (2,2) (1,3)
...
```

Written as (BATCH, ID). Wavefront d holds exactly the TILEs that the AIEs
start on in compute period d+1. That is as many TILEs as there are active
rows, and one port delivers them in one period.

At the ends of a block the wavefronts are shorter: pairs whose BATCH falls
outside 0..NB-1 are skipped. A block of NB BATCHes on B rows takes NB+B-1
wavefronts.

`bubble_free_sched` generates this sequence with two counters:

- a wavefront index d;
- an ID running from max(0, d-NB+1) to min(d, B-1).

BATCH is d - ID.

`tile_sender` consumes the sequence. For each pair it sends:

- one header beat, holding the destination row and the BATCH;
- the TILE itself, read from its buffer partition at:
  - LHS: row `m1*TI`, beat column `(k1*B + ID)*TK/EPB`;
  - RHS: row `(k1*B + ID)*TK`, beat column `n1*TJ/EPB`.

(EPB is the number of elements per 64-bit beat.)

The scheduler alone does not make the array bubble-free. The PL must also
keep the port saturated: the sender streams one beat per cycle through a
two-entry queue, so a TILE of R beats costs R+1 cycles. The FP32 32x32 TILE
is 512 data beats plus one header beat.

The AIE-array model in the testbenches counts compute bubbles: an AIE idle
between its first and last BATCH of a block. Every unstalled run checks
that this count is zero.

## 3. Ports shared by packets and broadcast

An LHS TILE of array row m2 is needed by all C columns in that row. An RHS
TILE of array column n2 is needed by all A rows.

The AIE switches can broadcast a stream to several columns. Broadcasting
across the whole array congests the switch boxes near the interface, so a
broadcast factor limits it:

- Each LHS port feeds BF_L columns, so a row m2 needs C/BF_L ports with
  identical data.
- Likewise each RHS port feeds BF_R rows, so a column n2 needs A/BF_R ports.

The PL keeps one data mover per row m2 (LHS) and per column n2 (RHS).
`stream_bcast` copies the mover's stream onto its ports. It is an eager fork:

- each port takes a beat when it can;
- a per-port "taken" bit stops a port from seeing the same beat twice;
- the mover advances once every port has the beat.

Ports may take a beat in different cycles, but a port that stalls holds
back the mover, and with it its sibling ports, once they have taken the
current beat.

PLIO port numbering:

| stream | port index | feeds |
|---|---|---|
| LHS | `p = m2*(C/BF_L) + g` | columns (m2, n2) with `n2/BF_L == g` |
| RHS | `q = n2*(A/BF_R) + h` | columns (m2, n2) with `m2/BF_R == h` |
| output | `m2*C + n2` | one port per AIE column, no header |

At the defaults this gives 2 LHS ports, 4 RHS ports and 4 output ports for
16 AIEs.

## 4. Buffers, double buffering and control

**Loading (`blk_loader`).** Each off-chip block arrives as a row-major
stream of 64-bit beats. The loader writes it into the partition of the
mover that owns it:

- The LHS buffer is split by groups of TI rows. The partition is the array
  row m2.
- The RHS buffer is split by groups of TJ/EPB beat columns. The partition is
  the array column n2.
- Every partition has two banks. The off-chip level is double-buffered:
  block i+1 is loaded while block i is sent to the AIEs.

**Buffer memories (`tile_ram`).** Simple dual-port RAM with 64-bit words
and a one-cycle read. A read of an address in the cycle it is written
returns the old word.

**Accumulation (`out_accum`, one per AIE column).** It receives that
column's output TILEs in BATCH order. Each TILE is TI rows of TJ 32-bit
results, two per beat.

- Each TILE is added into slot `m1*Z + n1` of the current output bank:
  - FP32 uses `fp32_add`, with round to nearest even and subnormals flushed
    to zero.
  - The integer types use 32-bit two's-complement adds.
- The very first TILE of an output block is written, not added: k0 = 0 and
  k1 = 0.
- The addition is a read-modify-write on the RAM. A forwarding register
  covers back-to-back beats to the same word.
- Two output banks let block o be stored while block o+1 accumulates.

**Store (`out_drain`).** It reads a finished output block across the A*C
column partitions. One read address goes to all partitions and one word is
selected. The block goes out row-major, two results per beat.

**Control (`automm_top`).** No central state machine: six counters
interlock the pipeline stages.

| counter | meaning |
|---|---|
| `ld_it_q` | loads started |
| `ld_done_q` | loads finished |
| `sd_done_q` | blocks sent to the AIEs |
| `acc_it_q` | k0 iterations accumulated, per column |
| `acc_o_q` | output blocks accumulated, per column |
| `dr_done_q` | output blocks stored |

Each stage may start when both hold:

- its predecessor is ahead of it;
- its successor is less than two behind, since there are only two banks.

In detail:

- A load starts if `ld_it < sd_done + 2`.
- A send starts if `sd_done < ld_done`.
- An accumulation iteration starts if `acc_o < dr_done + 2`.
- A store starts when every column has finished the block.

Bank parity is the low bit of the matching counter. An assertion checks
that a mover never reads the bank a loader is filling.

To run, pulse `start` with `cfg_m0 = M/(X*A*TI)`, `cfg_n0 = N/(Z*C*TJ)` and
`cfg_k0 = K/(Y*B*TK)`:

- The host streams LHS and RHS blocks in (m0, n0, k0) order, k0 innermost,
  on `lhs_in_*` and `rhs_in_*`.
- Results come out on `res_*`, one output block per (m0, n0).
- `res_last` marks the end of each block.
- `done` pulses after the last result beat.

All streams are valid/ready: a beat moves when both are high.

## 5. Data formats

- **Input beats.** Input elements are packed 2 (FP32), 4 (INT16) or 8
  (INT8) per 64-bit beat, lowest lane first. 64 bits is the width of a
  PL-side interface channel.
- **Output beats.** Two 32-bit words per beat.
- **Packet header** (`automm_pkg::pkt_hdr_t`). One beat:
  - bits 7:0 hold the destination row inside the column;
  - bits 15:8 hold the BATCH.

  The real AIE packet header is vendor-defined. This layout only stands in
  for it, and an integration would replace it.
- **`*_plio_last`.** Marks the last beat of each TILE packet.

## 6. How far the RTL goes, and where it departs

What is built follows the architecture:

- the four-level tiling;
- the wavefront order;
- header-addressed TILE packets;
- broadcast factors;
- double-buffered input and output;
- accumulation on the PL for FP32, INT16 and INT8.

Choices this design makes where the architecture is silent:

- the off-chip stream format;
- buffer partitioning and addressing;
- the header layout;
- the eager fork;
- the counter-based control;
- the INT32 accumulation of the integer types;
- the X/Y/Z defaults.

Not in the RTL, because it is fixed hardware or software:

- the AIE kernels and the AIE array;
- switch routing, the interface tiles' clock crossing, the NoC and DDR;
- the host runtime and the design-space exploration that picks the
  parameters.

Known limits:

- **Off-chip bound at the defaults.** With X = Y = Z = 2 the design is
  bound by off-chip bandwidth. One RHS block (256 x 256 FP32, 32768 beats)
  takes longer to stream in than the array needs to compute it (about
  11 x 2056 cycles), so the AIEs are busy about a third of the time in the
  full-size simulation. Larger X/Y/Z, and therefore larger buffers, raise
  the reuse. The evaluated designs filled over 80% of the on-chip RAM.
- **No padding.** Matrix sizes must be multiples of the block size; padding
  is left to the host.
- **One output port per column.** Output TILEs use one port per AIE column,
  without header or sharing.

## 7. Files

| file | contents |
|---|---|
| `rtl/automm_pkg.sv` | data types, beat widths, header struct |
| `rtl/automm_top.sv` | the PL side, its control counters and the port map |
| `rtl/bubble_free_sched.sv` | wavefront (BATCH, ID) generator |
| `rtl/tile_sender.sv` | packet data mover for one partition |
| `rtl/stream_bcast.sv` | eager fork onto broadcast ports |
| `rtl/blk_loader.sv` | off-chip block loader into partitioned, double-banked buffers |
| `rtl/tile_ram.sv` | simple dual-port buffer RAM |
| `rtl/out_accum.sv` | per-column accumulator with two output banks |
| `rtl/fp32_add.sv` | single-precision adder |
| `rtl/out_drain.sv` | output block store |
| `tb/aie_array_model.sv` | behavioural AIE array (see below) |
| `tb/automm_host.sv` | behavioural host and off-chip memory |
| `tb/automm_system.sv` | top, AIE-array model and host wired together |
| `tb/tb_*.sv` | self-checking testbenches |

## 8. Verification

Every block has a self-checking testbench. Each one prints
`TB_RESULT checks=N failures=F` and has a watchdog.

The AIE-array model stands in for the vendor array. It models:

- packet routing by header and broadcast to BF columns;
- ping-pong banks per AIE;
- the read-after-write chain;
- a fixed compute time per TILE;
- optional random refusals on its ports, standing in for switch
  congestion.

The model computes exact integer products. The host model uses
integer-valued data, so FP32 results are compared bit for bit.

| testbench | what it covers |
|---|---|
| `tb_fp32_add` | Directed and random cases against a double-precision sum with an independent round-to-nearest-even conversion to single precision. |
| `tb_bubble_free_sched` | The exact pair sequence for several block sizes, including the published 4-row example. |
| `tb_automm_top` | Three small systems (FP32, INT16 with random host gaps and port stalls, INT8). Counts each mechanism and fails if one never occurs: overlapped loading, overlapped storing, accumulation over k0, packets to several rows, broadcast, split fork, back-pressure. |
| `tb_automm_full` | All defaults, FP32, a 64 x 512 x 256 product over two k0 iterations: 8192 result beats, no compute bubbles, about 97k cycles. |
| `tb_automm_workloads` | INT16 (64 x 512 x 512) and INT8 (128 x 512 x 256) at the default array and TILE size: slices of the large integer workloads that step through m0, n0 and k0. |

To simulate with Verilator 5 from the repository root:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_automm_full \
    -y rtl -y tb +libext+.sv -Irtl rtl/automm_pkg.sv tb/tb_automm_full.sv
./obj_dir/Vtb_automm_full
```

Replace `tb_automm_full` with any other testbench name.

The simulator is two-state: every register that is read is reset. To try
other configurations:

- override the parameters of `automm_system` in `tb_automm_top`;
- keep `TK` and `TJ` multiples of the elements per beat;
- make `BF_L` divide `C` and `BF_R` divide `A`.
