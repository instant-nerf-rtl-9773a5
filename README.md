# Instant-NeRF near-memory accelerator: RTL of one LPDDR4 die

Training an Instant-NGP style neural radiance field on an edge device has
two memory-bound steps. The first is the hash-table lookup (HT). The second
is its backward pass (HT_b), which updates the table.

- **HT.** Every sample point looks up the 8 corners of its grid cube in 16
  resolution levels. Each level is a 2 MB table. The lookups land at nearly
  random addresses, so caches do not help.
- **HT_b.** The same random lookups update the entries they read.
- **MLPs.** The small MLPs that follow move a lot of intermediate data but
  have tiny weights.

This design moves that work into the DRAM. Next to each bank of an LPDDR4
die sits a small compute engine with its own controller. It reads and writes
its bank a whole 1 KB row at a time over the bank's internal path, never
through the narrow channel.

Three ideas keep the random lookups cheap:

1. **Locality-preserving hash.** The table index of a grid corner is a
   Morton code: the coordinate bits are interleaved. Neighbouring corners
   therefore get nearby indices, which often fall in the same DRAM row.
   Points along one camera ray are processed together, so consecutive
   lookups tend to hit the row already held next to the bank. Such a hit
   costs no DRAM access.
2. **Spreading rows over subarrays.** Consecutive rows of a level are
   placed in different subarrays. Each subarray keeps its own row open, so
   sequential misses do not conflict in one row buffer.
3. **Two kinds of parallelism across banks.**
   - *Parameter parallelism* for HT and HT_b: every bank owns a group of
     table levels and does only their lookups.
   - *Data parallelism* for the MLPs: every bank holds a copy of the tiny
     weights and works on its own points.

   Only small things then cross between banks: weights, step outputs and
   gradient partial sums.

The RTL covers the logic of one die: 16 near-bank units plus the link
between them. The DRAM cell arrays and the channel I/O are outside it.

## Structure

```
instant_nerf_die
 ├─ nmp_bank  x N_BANKS (16)        one per DRAM bank
 │   ├─ controller
 │   │   ├─ sync_fifo               instruction FIFO (128 x 64 bit = one row)
 │   │   ├─ addr_buffer             256 gather/scatter word addresses
 │   │   ├─ bank_addr_gen           word address -> subarray / row / column
 │   │   ├─ bank_cmd_gen            PRE/ACT/RD/WR with LPDDR4 timing
 │   │   ├─ level_bank_map          which bank owns a hash level
 │   │   └─ decoder FSM + compute-engine control generation
 │   ├─ row_register (r0)           1 KB register at the global row buffer
 │   ├─ data_mux                    r0 <-> scratchpad / controller / hash regs
 │   ├─ scratchpad                  2 KB = two 256-word lines
 │   ├─ crossbar x3                 scratchpad words -> PE operand lanes
 │   ├─ hash_regs                   per-level base address + table mask
 │   └─ pe_array                    256 INT32 PEs + 256 FP32 PEs
 │       ├─ int32_pe  (morton_hash inside)
 │       └─ fp32_pe   (fp32_mul, fp32_add, fp32_cvt inside)
 └─ interbank_link                  1 KB row transfers, 128 bits per cycle
```

Each bank talks to its DRAM array through die ports:

- `dram_cmd` (NOP/ACT/RD/WR/PRE), `dram_sa` (subarray) and `dram_row`;
- `dram_wdata` (the contents of r0) and `dram_rdata` (the row delivered by a
  RD).

A RD or WR moves one whole row between the subarray's row buffer and r0.

## The bank's datapath

Everything a bank computes passes through the 2 KB scratchpad:

- It has two lines of 256 words. A line is exactly one DRAM row.
- It is written by whole lines (from r0), by the PE array (one line of
  results), or one word at a time (gather).
- It is read by whole lines (towards r0, the controller or the hash
  registers) or through the crossbar.

**Crossbar.** There are three crossbar ports, a, b and c. Each delivers one
scratchpad word to each of the 256 lanes. The instruction does not give a
table of addresses. It gives an affine pattern: lane `i` reads word
`(base + j*stride) mod 512`, with `j = i` normally and `j = i/8` when the
instruction sets `grp8`. In `grp8` mode eight consecutive lanes see the same
point, one lane per cube corner.

**INT32 PEs.** They compute hash indices. The hash is

    index = ((f(x0) + f(x1)<<1 + f(x2)<<2) & mask) + base[level]

- `f` spreads a coordinate's bits two places apart.
- `(x0, x1, x2)` is the cube's corner plus the corner offset.
- `mask` and `base` come straight from the hash registers through a MUX.
  The MUX passes zero for any other INT operation.

In `grp8` mode, lane `i` uses corner `vertex XOR i[2:0]`. One instruction
therefore hashes all 8 corners of 32 points, which is the paper's 32 points
in parallel.

**FP32 PEs.** They do all other arithmetic: mul, add, sub, multiply-add,
floor, int-to-float, ReLU and ReLU gradient. Each has an accumulator for
multiply-accumulate. Trilinear interpolation is one `CLR` followed by eight
`MAC`s, one per corner.

- Format: IEEE binary32, rounded to nearest even.
- Subnormals are flushed to zero and NaNs are made canonical (this design's
  choice).

**Timing.** The PEs take one cycle. An INT or FP instruction takes 3
controller cycles (dispatch, execute, write-back) when it needs no DRAM.

## Instruction set

The paper names the controller's blocks: instruction FIFO, instruction
decoder, address buffer, compute-engine control generator, bank command
generator and bank address generator. It gives no instruction set, so the
one below is this design's own.

Instructions are 64 bits, 128 to a DRAM row. The field layout is
`inerf_pkg::instr_t`. For memory instructions the low 36 bits are an
immediate.

| opcode    | effect |
|-----------|--------|
| `LDROW`   | DRAM row `imm` → r0 → scratchpad `line` |
| `STROW`   | scratchpad `line` → r0 → DRAM row `imm` |
| `LDADDR`  | scratchpad `line` → address buffer (256 word addresses) |
| `LDHREG`  | scratchpad `line` → hash registers (words 0..15 level bases, word 16 mask) |
| `GATHER`  | for `imm` addresses from the buffer: DRAM word → scratchpad `line` word *k* |
| `SCATTER` | for `imm` addresses: scratchpad `line` word *k* → DRAM word |
| `INT`/`FP`| PE group operation `sub` on crossbar patterns a/b/c; `wb` writes the 256 results to `line` |
| `SEND`    | scratchpad `line` → r0 → the banks in mask `imm` |
| `RECV`    | row from bank `imm[15:0]` (any bank if `imm[16]`) → r0 → scratchpad `line` |
| `JUMP`    | continue at program row `imm` |
| `HALT`, `NOP` | |

**Starting a program.** `start` loads program row `start_row`, pushes it into
the FIFO one instruction per cycle, and runs it. Every bank gets the same
start pulse and the same program, so one broadcast program drives the whole
die.

**Level gating.** An instruction with `lvl_gate` set runs only in the bank
that owns hash level `level`; every other bank counts it as skipped. This is
how one program expresses parameter parallelism: the HT part is written once
per level, and each bank runs only its own levels.

## Gather, scatter and the r0 hit

This is the centre of the design. It is also where the paper's "local
register hit" is built.

**Tag and dirty bit.** r0 holds one DRAM row. The controller keeps a tag
(which row is held) and a dirty bit.

**Serving a gather/scatter word.** For each word, the bank address generator
splits the word address into a row and a column.

- *Hit:* the row equals the tag. The word moves between r0 and the
  scratchpad in one cycle, with no DRAM command.
- *Miss:* if r0 is dirty, it is first written back (PRE/ACT as needed, then
  WR). Then the new row is read (ACT/RD).

**Scatters.** A scatter only changes words inside r0. The row goes back to
DRAM when r0 is needed for another row, or when the scatter ends.

**Why hits are common.** The hash keeps neighbouring corners close together,
and points along a ray share cubes. So long runs of the 256 lookups of one
instruction fall into the same row. In the end-to-end test about 84% of
gather/scatter words hit.

**Subarray mapping.** The bank address generator puts logical row `r` into
subarray `r mod N_SUBARRAYS`, at row `r / N_SUBARRAYS` within it. The command
generator keeps one open row per subarray. A miss to a different row of the
same subarray is a *conflict* (PRE first). A miss to a subarray that has no
row open needs only ACT. Sequential rows of a level therefore spread over
subarrays instead of fighting over one row buffer.

**Command timing.** The command generator enforces these constraints:

- per subarray: tRCD, tRAS, tRP and tWR;
- per bank: tCCD, tRRD and a four-activate window tFAW.

tRA and tWA set how long a RD or WR occupies the global row buffer. A read
of a closed subarray takes `2 + tRCD + tRA` cycles. A read of an already open
row takes `2 + tRA` cycles.

## Sharing work between banks

**Level ownership.** `level_bank_map` groups the 16 levels into 8 units of
similar work: {0–4}, {5–8}, {9–10}, then 11, 12, 13, 14 and 15 alone. Unit
`u` belongs to bank `u mod N_BANKS`. With 16 banks, banks 0–7 each own one
unit and banks 8–15 own none. Those banks still take part in the MLP steps,
which run on all banks.

**The link.** `interbank_link` moves one whole row: from the sender's r0 into
the r0 of every bank in its destination mask. The row travels as 64 beats of
128 bits, one beat per cycle; several destinations form a broadcast.

**Arbitration.**

- A receiving bank runs `RECV`. It raises `rx_ready` and names the sender it
  expects, or accepts any sender.
- A sender is eligible only once every one of its destinations is ready and
  expects it.
- Eligible senders are served in round-robin order.
- A transfer takes 64 + 1 cycles after the last destination becomes ready.

Matching by sender keeps a row from reaching the wrong `RECV` when several
banks send to bank 0 at once. A sender whose receiver is busy elsewhere
cannot block the link.

**Data movements in a training step.** The four kinds the paper names map to
instruction sequences:

1. *Duplication* (weights to every bank): one `SEND` with a multi-bank mask,
   and `RECV` in the receiving banks.
2. *Step-to-step transfer* (HT output to the MLP banks): `SEND` and `RECV`
   between two banks.
3. *Intermediate data*: stays inside the bank.
4. *Gradient partial sums*: each bank `SEND`s its partial vector to one bank,
   which `RECV`s and adds them with FP `ADD`.

## Parameters

| parameter | default | source |
|-----------|---------|--------|
| banks per die `N_BANKS` | 16 | paper |
| row buffer / r0 | 1 KB | paper |
| per-bank internal path | 128 bit | paper |
| scratchpad | 2 KB | paper |
| INT32 / FP32 PEs `N_INT`, `N_FP` | 256 / 256 | paper |
| hash levels | 16, 2^19 entries (2 MB) each | paper |
| points in parallel | 32 (= 256 lanes / 8 corners) | paper |
| tRCD, tRAS, tRP, tWR, tCCD, tRRD, tFAW, tRA, tWA | 4, 9, 6, 6, 8, 2, 9, 2, 7 cycles | paper (LPDDR4 model) |
| subarrays per bank `N_SUBARRAYS` | 8 | own choice; the paper sweeps 1–64 |
| rows per bank | 2^17 (128 MB) | own choice, in the paper's 128–256 MB range |
| instruction width, FIFO depth | 64 bit, 128 | own choice |
| grid coordinate width | 11 bit | own choice |

## Where this departs from the paper, and what is missing

- **Own choices.** The instruction set, the controller state machine, the r0
  tag scheme, the affine crossbar patterns, the hash-register layout, the
  link protocol and its sender matching are all this design's. The paper
  names these blocks and says what they do, but not how.
- **The link.** The paper does not describe the hardware that carries
  inter-bank traffic. Here it is a single shared row-transfer path per die,
  one row at a time.
- **Not built.** The DRAM cell arrays, local and global row buffers and the
  SerDes/channel I/O are not built. They are analog or process-specific
  parts of the LPDDR4 die. The testbenches use a behavioural bank model
  (`tb/dram_bank_model.sv`) that also checks command timing.
- **Not modelled.** The host side is not modelled: ray sampling, volume
  rendering and the schedule of a full training iteration. So neither is the
  paper's 35,000-iteration training time.
- **Subarray requests are not overlapped.** In the paper, spreading
  sequential rows over subarrays lets those requests proceed in parallel.
  Here every subarray keeps its row open, so a later access to any of them
  avoids a new activation. But the bank serves one row request at a time:
  it has a single r0 and one outstanding request, so activations in
  different subarrays never overlap.
- **One die.** The paper's accelerator may span several DRAM dies. The top
  here is a single die.
- **Floating point.** Subnormals are flushed to zero.

## Testbenches and simulation

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. Shared pieces:

- `inerf_tb_pkg.sv`: an instruction assembler, a binary32 reference rounded
  from double precision, and a bit-level Morton reference.
- `dram_bank_model.sv`: the behavioural DRAM bank.

To run one with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/inerf_pkg.sv tb/inerf_tb_pkg.sv tb/tb_nmp_bank.sv --top-module tb_nmp_bank
./obj_dir/Vtb_nmp_bank +verilator+rand+reset+2
```

**`tb_nmp_bank`** runs one bank through a short program spread over two
program rows:

- hash, gather, FP multiply, add, scatter;
- a level-gated skip;
- `SEND` and `RECV`;
- a `JUMP`.

It checks every gathered word, every updated table word and the DRAM
protocol.

**`tb_instant_nerf_die`** is the end-to-end test. It runs a training-step
shaped program on a 3-bank die:

1. HT for one level of each owned unit: hash, gather, 8-corner
   interpolation, and results sent to bank 0 in order.
2. A weight broadcast from bank 0.
3. A data-parallel 4×4 MLP layer with ReLU on every bank.
4. A gradient partial-sum reduction at bank 0.
5. HT_b: gather, add and scatter back.

It checks every result against a reference computed in the testbench. It
also counts how often each mechanism happened: r0 hits, r0 misses, row
conflicts, gated skips, link rows, broadcasts, link waits, DRAM write-backs
and program-row jumps. A mechanism that never happened counts as a failure.

**Simulated sizes.** The die was simulated with 3 and 4 banks, each bank at
full size (256 + 256 PEs, 2 KB scratchpad, 1 KB rows). A 16-bank simulation
was not run. Verilator needs about 3.5 minutes to build the 3-bank model,
and the build time grows with the number of banks. The 16-bank die is
checked by lint and elaboration only.
