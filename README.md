# RSN-XNN: a reconfigurable stream network for transformer inference

A transformer encoder mixes large matrix multiplications with small, irregular
steps: bias, residual adds, scaling, softmax, and changes of data layout. A
fixed pipeline handles the large multiplications well but wastes hardware on
the irregular steps. A processor-like design handles everything, but the
instruction traffic slows it down.

RSN-XNN takes a middle path. The datapath is a set of **functional units
(FUs)** joined by latency-insensitive valid/ready streams. Each FU does one
job well: moving data on or off chip, buffering tiles, routing streams, or
multiply-accumulate. A computation is a **path** through this network.

- A program sets up a path by giving every FU on it a micro-operation (uOP).
  The uOP says what the FU does with the words that pass through it.
- The words then flow with no further control.
- Each FU runs its uOPs in order, so paths for different layers can overlap.
  One layer can be computing while the next layer's weights are loading and
  the previous layer's results are draining.

This repository holds synthesizable SystemVerilog for that datapath. It uses
the unit counts of the published VCK190 (Versal) design: six matrix engines,
three LHS buffers, three RHS buffers, six result buffers, two routing meshes,
a DDR and an LPDDR port, and a three-level instruction decoder. It also
contains a self-checking testbench for every block and an end-to-end
testbench that runs a two-layer program.

## 1. The network

```
   instruction memory
          |
   +--------------- decoder unit ----------------+
   | fetch -> L1 -> 16 x (mOP FIFO -> L2 -> uOP FIFO) |
   +-------------------------------------------------+
          | one uOP stream per PL FU
          v
 off-chip DDR <-> DDR FU --load--> MemA0-2 --> MeshA --LHS--> MME0-5 --> MemC0-5
                   ^   \--load--> MemB0-2 --> MeshB --RHS-->    |           |
                   |                ^                           |           |
 off-chip LPDDR -> LPDDR FU --------+          MemC0-5 --> MeshA (next layer)
                   |                                                        |
                   +----------------------- store <-------------------------+
```

| FU | Count | Input streams | Output streams | Storage (default) |
|---|---|---|---|---|
| DDR | 1 | off-chip read, MemC0-5 | MemA0-2, MemB0-2, off-chip write | 8-word read buffer |
| LPDDR | 1 | off-chip read | MemB0-2 | 8-word read buffer |
| MemA | 3 | DDR | MeshA | 2 x 32768 words (0.25 MB) |
| MemB | 3 | LPDDR, DDR | MeshB | 2 x 65536 words (MemB0/1), 2 x 32768 (MemB2), plus a 1024-word bias row |
| MemC | 6 | its own MME | DDR, MeshA | 2 x 131072 words (1 MB) |
| MeshA | 1 | MemA0-2, MemC0-5 (9) | LHS of MME0-5 | none |
| MeshB | 1 | MemB0-2 (3) | RHS of MME0-5 | none |
| MME | 6 | LHS, RHS | its own MemC | 4096-word partial-sum buffer |

Each word on every stream is one IEEE-754 single-precision value. A word
moves when `valid && ready`. No FU depends on a fixed latency from any other
FU. Back-pressure anywhere stalls everything upstream of that point, and
nothing else.

MMEs and MemCs are paired one to one. MME *i* always writes to MemC *i*, so
the return path needs no mesh.

## 2. Programs: packets, mOPs and uOPs

All PL FUs (all FUs except the MMEs) are driven by one instruction sequence in
memory. The sequence is a list of **packets**. Each packet is a 32-bit header
word followed by `window` **mOPs** of three words each (96 bits, most
significant word first).

```
 31    28 27        20  19  18      13 12                 0
+--------+------------+----+----------+--------------------+
| opcode |    mask    |last|  window  |       reuse        |
+--------+------------+----+----------+--------------------+
```

- **opcode** selects the FU type: 0 DDR, 1 LPDDR, 2 MemA, 3 MemB, 4 MemC,
  5 MeshA, 6 MeshB. Any other value targets nothing, and the packet is
  skipped.
- **mask** selects instances of that type. Bit *i* selects instance *i*.
  Setting several bits broadcasts the same packet to several FUs, e.g. all
  six MemCs.
- **last** makes each target FU exit after the final uOP of this packet.
- **window** gives the number of mOPs in the packet (0-63).
- **reuse** gives how many times the window is replayed (0 is taken as 1).

Decoding happens in three levels:

1. **Fetch and level 1** (`rsn_fetch_l1`). This level reads one word per
   cycle, with up to 4 reads in flight. It turns opcode and mask into a set of
   target FUs. It then broadcasts the header and then each mOP into the mOP
   FIFOs of all targets in a single cycle. A broadcast waits until **every**
   target FIFO has room, so one full FIFO stalls the whole fetch.
2. **Level 2** (`rsn_mop_decoder`), one per FU. It stores the window, then
   issues it `reuse` times into the FU's uOP FIFO: w0, w1, ..., w0, w1, ....
   The uOP that closes a packet with `last` carries the exit flag. A repeated
   pattern such as "load to MemA0, then to MemA1, 128 times" therefore costs
   one header and two mOPs.
3. **Level 3** is in each FU. The FU casts the 96 bits to its own uOP struct
   and runs it.

Both FIFOs in front of each level-2 decoder are 6 entries deep. This depth was
reported to be deadlock-free for the published implementation. The programmer
must still avoid one kind of deadlock: FU *a* waiting for data that FU *b*
only produces after a uOP stuck behind *a*'s packets in the single sequence.
Packets should be ordered roughly in dataflow order, with long transfers split
so that no FU runs more than a few uOPs ahead of its partners.

In this datapath an mOP and a uOP are the same 96 bits. Level 2's work is
storing the window and replaying it, not translating the fields.

### MME programs

The six MMEs do not take uOPs from the sequence. Each MME has a local store of
32 four-byte uOPs:

- Write the store through `mme_prog_we/addr/data`.
- Set the list length in `mme_prog_len[i]`.
- Pulse `mme_start`. Every MME then runs its list once.

In the original design, these engines are processor tiles with their own
program memory. Keeping their uOPs off the shared sequence is what keeps the
sequence small.

## 3. uOP formats

All structs are packed, with the first field at the most significant end of
the 96 bits. Widths are this design's own. The field *set* follows the control
planes the architecture defines for each FU.

| FU | Fields (MSB first, bits) |
|---|---|
| DDR | addr 32, stride_size 16, stride_offset 16, stride_count 16, load 1, store 1, dest 3, src 3, pad 8 |
| LPDDR | addr 32, stride_size 16, stride_offset 16, stride_count 16, dest 3, load_bias 1, pad 12 |
| MemA | rows 16, cols 16, reps 16, src 3, load 1, send 1, pad 43 |
| MemB | rows 16, cols 16, reps 16, load 1, send 1, transpose 1, bias 1, pad 44 |
| MemC | recv_len 24, send_len 24, recv 1, send 1, to_mme 1, softmax 1, gelu 1, norm 1, transpose 1, tcols 16, pad 25 |
| Mesh | size 24, en 8, src 8 x 4 (src[7] first), pad 32 |
| MME (32 bits) | num 14, accumk 14, bias 1, addprev 1, scale 1, acck 1 |

For the DDR and LPDDR FUs, `dest` numbers MemA0-2 as 0-2 and MemB0-2 as 3-5
(LPDDR: MemB0-2 as 0-2). The DDR FU's `src` numbers MemC0-5 as 0-5. For
MeshA, source indices are MemA0-2 = 0-2 and MemC0-5 = 3-8. For MeshB, sources
are MemB0-2 = 0-2. Mesh destinations are always MME0-5 = 0-5.

## 4. What each FU does with a uOP

### DDR and LPDDR: strided transfers

A uOP describes `stride_count` bursts of `stride_size` words. Burst *s*
starts at `addr + s * stride_offset`, and addresses count words. This covers
contiguous blocks, tiles of a row-major matrix, and column slices.

- **Load.** The DDR FU reads the pattern and streams it to `dest`.
- **Store.** The DDR FU takes the same number of words from MemC `src` and
  writes them to the pattern.
- **Both.** A uOP with both flags runs both parts at the same time.
- **LPDDR FU.** It only loads. Its `load_bias` flag is carried but has no
  effect: the receiving MemB decides whether the words are a bias row.

DDR bandwidth is shared between loads and stores. The intended schedule is
**fine-grained interleaving**: software alternates short load uOPs with short
store uOPs. The next uOP starts only when both halves of the current one have
finished.

Off-chip port protocol:

- **Read request.** `rd_req_valid/ready` with a word address.
- **Read response.** `rd_rsp_valid` with data and no ready. Responses must
  come back in request order. The FU never has more than 8 reads outstanding
  or buffered, so the response never needs to be stalled.
- **Write.** `wr_valid/ready` carries address and data together.

### MemA, MemB, MemC: ping-pong scratchpads

Each Mem FU has two banks and a one-bit flag that survives from one uOP to the
next:

- **Receive** writes into the bank the flag points to.
- **Send** reads from the other bank.
- A uOP that receives a tile flips the flag when it finishes. The tile just
  received therefore becomes the one the *next* uOP sends.

A uOP can both receive and send. The two halves run in parallel, which
overlaps loading tile *t+1* with streaming tile *t*. The usual sequence is:

```
uOP 0: load            (fills bank 0, flag -> 1)
uOP 1: load + send     (fills bank 1 while bank 0 is sent, flag -> 0)
uOP 2: load + send     (fills bank 0 while bank 1 is sent, flag -> 1)
...
uOP n: send            (sends the last tile)
```

A send without a load sends the same tile again. This is how one RHS tile is
reused against many LHS tiles.

The send order of each Mem FU matches what the MME consumes. For an output
tile of M x N with depth K:

- **MemA** stores a `rows x cols` (M x K) tile row-major. For each row *i*, it
  sends that row `reps` (= N) times. Output: row 0 N times, then row 1 N
  times, ....
- **MemB** stores a `rows x cols` (K x N) tile. It sends column *n* as K
  words, for n = 0..N-1, and repeats the whole sequence `reps` (= M) times.
  - With `transpose`, the incoming words are taken to be the N x K transpose
    and are stored transposed. Data that sits in memory the other way round
    therefore needs no separate pass.
  - A load with `bias` set instead fills a separate bias row of `cols` words
    and leaves the flag alone.
  - A send with `bias` set follows each column with its bias word, which the
    MME adds.
  - MemB takes data from LPDDR (weights, biases) or DDR (activations used as
    the right operand, e.g. keys and values in attention). If both offer a
    word in the same cycle, LPDDR wins.
- **MemC** receives `recv_len` result words from its MME in arrival order. It
  sends `send_len` words in order, either to the DDR FU (to be stored) or,
  with `to_mme`, into MeshA. In the second case they become the LHS of the
  next layer without leaving the chip. With `transpose`, the buffered tile
  is read as a row-major tile of `tcols` columns and sent column by column.
  `send_len` should be a multiple of `tcols`. The read address steps by
  `tcols` and wraps to the top of the next column, so no divider is needed.

### MeshA and MeshB: circuit switching with fan-out

A mesh uOP sets up one circuit for each destination *d* whose `en` bit is
set, fed from source `src[d]`. Every circuit moves `size` words, and then the
next uOP can change the routing.

Several destinations may name the same source. The word is then **copied** to
all of them, and it leaves the source only in a cycle where every copy can be
taken. Without that rule, the copies would drift apart, and a slow engine
would stall its partners with a word already gone. Each copy group makes
progress on its own. A stalled MME blocks only the sources feeding it.

A destination's `valid` is raised only together with the `ready` of every
other member of its group. A word offered to an MME is therefore never
withdrawn. The mesh is combinational: one word per circuit per cycle, with no
storage.

### MME: dot products with a fused epilogue

An MME uOP produces `num` outputs. Each output is the sum of `accumk`
products of one LHS word and one RHS word, followed by optional extra steps in
this fixed order:

| Flag | Extra input per output | Effect |
|---|---|---|
| `acck` | none | The sum is kept in the partial-sum buffer, not sent. The next uOP starts each output from the kept value. Used to split K over several tiles. |
| `addprev` | 1 LHS word | adds it (residual connection) |
| `bias` | 1 RHS word | adds it |
| `scale` | 2 RHS words, γ then β | y = y·γ + β (the affine part of LayerNorm) |

When `acck` is set, the other flags do nothing for that uOP. A typical K-split
is therefore "acck, acck, ..., bias". Finished outputs go to MemC. Arithmetic
is FP32 with round-to-nearest-even. Subnormals are flushed to zero, and
overflow gives infinity.

Operands enter through 2-entry FIFOs. As a result, the LHS ready never
depends on the RHS valid, or the other way round. This matters because both
operands may come from the same mesh.

## 5. Pipelining: what overlaps with what

The design has no global schedule. Overlap comes from each FU running ahead
until its streams block:

- **Ping-pong.** A Mem FU loads the next tile while it sends the current one.
- **Layer pipeline.** A MemC that has collected one layer's tile sends it
  through MeshA to another MME. That MME computes the next layer while the
  first MME is already filling the other MemC bank.
- **Load/store interleave.** DDR uOPs alternate between loading inputs and
  storing results.
- **Decoder slack.** The 6-entry FIFOs let fetch run ahead of busy FUs. When
  one fills up, fetch stops until that FU drains.

`done` on the top level rises when:

- level 1 has consumed the whole program,
- every PL FU has executed a uOP marked last, and
- every MME has finished its list.

## 6. Top level (`rsn_xnn_top`)

| Port group | Meaning |
|---|---|
| `start`, `prog_base`, `prog_len` | Run `prog_len` words of the instruction sequence from word address `prog_base`. |
| `imem_*` | Instruction read channel, same protocol as the DDR read channel. At most 4 reads outstanding. |
| `ddr_rd_*`, `ddr_wr_*` | DDR channels of the DDR FU. |
| `lp_rd_*` | LPDDR read channel. |
| `mme_prog_*`, `mme_start` | MME uOP stores and their start. |
| `done`, `fu_exited[15:0]` | Completion, as a whole and per FU (flat order: DDR, LPDDR, MemA0-2, MemB0-2, MemC0-5, MeshA, MeshB). |

Parameters set the bank sizes (`MEMA_BANK`, `MEMB01_BANK`, `MEMB2_BANK`,
`MEMC_BANK`), the MME partial-sum depth, and the uOP FIFO depth. Defaults are
the sizes listed in section 1.

### Example: two layers, written out

The end-to-end testbench `tb/tb_rsn_xnn_top.sv` holds a complete program. It
is the best starting point for writing a new one. It computes:

```
Y = X · W1 + b1        X 4x4 (DDR), W1 4x6 and b1 (LPDDR)
Z = Y[:, 0:3] · W2     W2 3x1 (DDR)
```

The program is placed as follows:

- **Layer 1, N split.** Columns 0-2 of Y run on MME0, fed by MemB0.
  Columns 3-5 run on MME1, fed by MemB1, which loads its part of W1
  transposed.
- **Shared LHS.** MemA0 holds X, and MeshA copies it to both MMEs (fan-out).
- **K split.** K is split into two halves. MemA0 and MemB0/1 ping-pong between
  them. The MMEs keep partial sums over the first half (`acck`) and add the
  bias on the second half.
- **Layer 2 on chip.** MemC0 sends Y[:, 0:3] through MeshA to MME2 as LHS.
  MemB2 sends W2.
- **Stores.** The MemC1 store is interleaved with the DDR loads. MemC0 and
  MemC2 are stored at the end.

The program uses broadcast masks, windows longer than one, and reuse counts
above one. The testbench checks every stored word against an FP32 reference
model (at most 1 ulp apart). It also counts each of these events and requires
all of them to occur at least once:

- reuse
- fan-out
- ping-pong overlap
- layer pipeline
- partial sums
- bias
- transpose
- memory stalls
- decoder back-pressure
- strided access
- load/store interleave
- FU exit

## 7. Capacity of the default configuration

| Workload | Fits? | Reasoning |
|---|---|---|
| Attention Q·Kᵀ, 512x64x512 per head | yes | The 512x64 LHS is exactly one MemA bank (32768 words). The 64x512 RHS is half a MemB0 bank. The 512x512 output is spread over the MemCs (131072 words each). |
| Attention S·V, 512x512x64 | yes, tiled | The 512x512 LHS is 8 MemA banks, so it is split along K into 8 tiles with `acck`. An output tile is limited to 4096 words by the partial-sum buffer. |
| Feed-forward pair 1024→4096→1024, seq 512, batch 6, kept on chip | no | The intermediate is 6·512·4096 words = 50 MB against 6 MB of MemC. It has to go through DDR. |

`tb_rsn_mm_workload` runs one 16x64x16 tile of the first product on two
MMEs: 16384 multiply-adds in about 10300 cycles, including fetch, decode and
all off-chip transfers.

Throughput is far below the original design. Each MME here does one FP32
multiply-add per cycle, so six MMEs give 12 FLOP per cycle. One 512x64x512
product then takes about 2.8 M cycles.

## 8. Where this design departs from the architecture it follows

- **MMEs.** These are programmable-logic engines doing one multiply-add per
  cycle. The original maps each MME onto 64 vector-processor tiles
  (4x4x4 tiles, about 1.1 TFLOPS per engine). The uOP format, the stored
  program, and the epilogue options are kept.
- **Stream width.** Streams are 32 bits: one FP32 word per beat. The original
  moves several hundred words per cycle across the network (about 9 kbit).
  The unit counts and the buffer sizes in bytes are kept. Bank depths are
  those sizes divided by 4 bytes and by 2 for ping-pong.
- **MemC compute.** MemC can transpose a tile. It does not compute Softmax,
  GELU, or the LayerNorm statistics, and it does not convert the blocked
  output layout of the original vector engines, which a one-word-per-beat
  MME does not produce. The three compute flags are decoded and ignored, and data passes through
  unchanged. The affine part of LayerNorm is available through the MME's
  `scale` step.
- **MemC sizes.** MemC sizes are a single `recv_len`/`send_len` pair instead
  of four separate matrix and tile sizes. Send order equals receive order.
- **MemB inputs.** The two MemB inputs (LPDDR and DDR) are merged with fixed
  priority. The original does not say how a MemB picks its source.
- **MemA source.** MemA's `src` field exists, but DDR is the only source wired.
- **Instruction memory.** The instruction memory is a separate read port. On
  the board it lives in LPDDR and shares that port.
- **Off-chip protocol.** The off-chip interfaces are simple word-address
  channels, not AXI. A wrapper must pack words into bursts.
- **Level 2 replay.** Level 2 receives the whole window before it replays any
  of it.
- **Field widths.** All header and uOP field widths are this design's choice.
  The original names the fields but does not give widths.

## 9. Simulating and changing it

Every testbench is self-checking. Each one ends with the line
`TB_RESULT checks=<n> failures=<m>` and has a watchdog. For example:

```
verilator --binary --timing -Wno-fatal --top-module tb_rsn_xnn_top \
    rtl/rsn_pkg.sv tb/tb_fp_pkg.sv rtl/rsn_fifo.sv rtl/rsn_fetch_l1.sv \
    rtl/rsn_mop_decoder.sv rtl/rsn_decoder_unit.sv rtl/rsn_ddr_fu.sv \
    rtl/rsn_lpddr_fu.sv rtl/rsn_mema_fu.sv rtl/rsn_memb_fu.sv \
    rtl/rsn_memc_fu.sv rtl/rsn_mesh_fu.sv rtl/rsn_mme_fu.sv \
    rtl/rsn_xnn_top.sv tb/tb_rsn_xnn_top.sv
./obj_dir/Vtb_rsn_xnn_top
```

For a single block, swap in its testbench (`tb/tb_rsn_<block>.sv`) and
top-module name. Passing every file is fine, because unused modules are
ignored. `tb/tb_fp_pkg.sv` holds the FP32 reference model that the
arithmetic tests use: a real-valued multiply and add, rounded to single
precision.

| Testbench | What it stresses |
|---|---|
| `tb_rsn_fifo` | random push/pop, full and empty |
| `tb_rsn_fetch_l1` | random packets and masks, stalls, all-targets-at-once broadcast, restart at a new base |
| `tb_rsn_mop_decoder` | window and reuse replay, last flag |
| `tb_rsn_decoder_unit` | whole decoder with random FU back-pressure |
| `tb_rsn_ddr_fu`, `tb_rsn_lpddr_fu` | strided patterns, random memory latency, interleaved loads and stores |
| `tb_rsn_mema_fu`, `tb_rsn_memb_fu`, `tb_rsn_memc_fu` | ping-pong order, overlap, transpose (MemB on input, MemC on output), bias, routing |
| `tb_rsn_mesh_fu` | random routings with fan-out and back-pressure |
| `tb_rsn_mme_fu` | dot products, partial sums, every epilogue step, FP32 results within 1 ulp |
| `tb_rsn_xnn_top` | the two-layer program of section 6 at full default sizes |
| `tb_rsn_mm_workload` | tiled matrix products with the LHS copied to two MMEs and the RHS split by columns: the 1x8x4 example tile, then a 16x64x16 tile of the attention product (head dimension 64) |

Things to know before changing the design:

- All FUs use the same handshake skeleton: take a uOP when idle, run its
  parts, and take the next uOP once all parts are done.
- A new FU type needs:
  - an opcode in `rsn_pkg`,
  - a flat index before `N_FU`,
  - a branch in the level-1 target decode,
  - a uOP struct that fits in 96 bits.
- Verilator reports unused bits of the uOP padding fields. It also notes that
  `rst_n` drives both asynchronous resets and synchronous logic (memory
  writes have no reset). Neither is a circuit problem.
