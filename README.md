# Hermes: an NTT accelerator with hybrid dataflow, in SystemVerilog

The number-theoretic transform (NTT) is the core of polynomial multiplication in lattice
cryptography and homomorphic encryption. Its cost comes from data movement, not arithmetic. An
N-point transform has log2 N stages of N/2 butterflies. In each stage the butterfly partners are
a different distance apart, so a fully unrolled pipeline would need log2 N stages of hardware,
while a single butterfly array reused for every stage would need a full permutation network
between stages.

Hermes does neither. It builds one array for a fixed *partial* NTT of N_part = 256 points, with
S_part = 8 butterfly stages in a row. A larger transform is cut into N_part-point blocks, which are
sent through that array twice:

- **Pass 1** covers global stages 0..7. Each block takes coefficients that lie N/256 apart.
- **Pass 2** covers global stages 8..log2 N − 1. Each block takes 256 consecutive coefficients.

When N < 2^16, the second pass has fewer than eight stages left to do. The surplus NTT units then
run in *Swap Mode*: they pass data through instead of computing. The same hardware therefore
handles every N from 2^8 to 2^16 with no reconfiguration. Across the array, data is unrolled both
in time (one block is several cycles of 2p coefficients) and in space (2p lanes). Stages are
unrolled in space (8 stages in a row) and in time (two passes). This mix is the "hybrid dataflow".

The RTL here implements the design's main configuration:

- p = 16 butterfly pairs. Each stage has p/2 = 8 NTT units (NTTUs) of two butterfly units (BUs)
  each, so 2p = 32 coefficients per cycle.
- N_part = 256.
- 64-bit coefficients.
- Transforms up to N = 2^16.

The result is the forward negacyclic NTT (Cooley–Tukey, in place). The input is in natural order
and the output is in bit-reversed order.

## 1. Arithmetic

The transform is the in-place Cooley–Tukey negacyclic NTT. With
ψ a primitive 2N-th root of unity modulo q and `psi_rev[k] = ψ^bitrev_logN(k)`, stage g
(g = 0 .. log2 N − 1) pairs index i with i + N/2^(g+1) for every i whose bit (log2 N − 1 − g) is
zero, and computes

    w  = psi_rev[2^g + (i >> (log2 N − g))]
    y1 = x1 + w·x2 mod q,   y2 = x1 − w·x2 mod q          (x1 = a[i], x2 = a[i + N/2^(g+1)])

**Butterfly unit (`hermes_bu`).** Each product w·x2 is a Shoup multiplication. A companion
`wpre = floor(w·2^64 / q)` is stored next to every twiddle:

    qhat = floor(x2·wpre / 2^64);  r = x2·w − qhat·q  (mod 2^64);  if r ≥ q: r −= q

This yields x2·w mod q exactly, provided q < 2^62. No division is done at run time.

The BU is pipelined over four cycles:

1. The two 64×64 products.
2. The correction product and subtraction.
3. The conditional subtraction.
4. The modular add and sub, plus the mode multiplexer.

In Swap Mode the BU outputs (y1, y2) = (x2, x1). Those are the two multiplexer inputs shown in the
original drawing of the unit.

**Twiddle tables.** The host supplies ψ and the twiddle tables; the testbenches compute them. Each
NTTU keeps its own copy of the twiddles its stage can use (`hermes_tf_mem`). Each copy has two
read ports, one per BU. All copies share one load port, and each copy keeps only the indices below
its depth.

## 2. Where every coefficient lives: the fragmented URAM layout

A polynomial sits in a *URAM group* (`hermes_uram_group`) of 2p = 32 single-port-wide banks, each
2^16/32 = 2048 words deep. Coefficient i is stored at

    bank(i)   = (i XOR (i >> 8)) mod 32          i.e. (i XOR floor(i / N_part)) mod 2p
    offset(i) = i >> 5                           i.e. floor(i / 2p)

A plain `i mod 32` layout would serve pass 2, which reads consecutive indices, but not pass 1,
which reads a stride of N/256. The XOR with the block number rotates each row of 256 coefficients
across the banks. With it, a strided set of 32 coefficients also lands in 32 different banks.

**Round order.** Which 32 block positions are read together is the *round order*. The package
function `round_mask(pass2, log_n, ...)` returns the bits of the 8-bit block position j that
select the round. The other five bits select the lane. They are exactly the bits the bank function
depends on, so every round is free of bank conflicts. `deposit(r, s, mask)` builds j from the
round number r and the slot s.

| Case | Block positions | Bank bits |
|---|---|---|
| Pass 2 (and N = 256) | j = i mod 256 | j[4:0] |
| Pass 1 (stride 2^a, a = log2 N − 8) | j = i / 2^a mod 256 | bits b of j with b + a < 5 (i bits 0..4) or 8 ≤ b + a < 13 (i bits 8..12) |

The URAM testbench walks every round of both passes for every N from 2^8 to 2^16. It asserts that
no round hits the same bank twice.

**Ping-pong groups.** There are two groups:

- The load beats write group 0.
- Pass 1 reads group 0 and writes group 1.
- Pass 2 reads group 1 and writes group 0.
- The store reads the group holding the result: group 0 after two passes, group 1 after the
  single pass of N = 256.

Each group has one read port and one write port of 32 coefficients per cycle. Per-slot crossbars
route them to the banks.

## 3. The compute array (`hermes_ntt_core`)

    round in (32 lanes, arrangement A)
      -> stage 0 .. stage 3    (8 NTTUs each, "dependent" stages, partner distance 128, 64, 32, 16)
      -> stream switch         (block buffer, arrangement A -> arrangement B)
      -> stage 4 .. stage 7    (8 NTTUs each, "independent" stages, partner distance 8, 4, 2, 1)
    round out (32 lanes, arrangement B)

**Rounds.** A block of 256 coefficients enters as 8 *rounds*, one per cycle. Round t carries 32
coefficients. For a stage to compute in place without cross-round communication, every butterfly
pair must travel in the same round. A single lane arrangement cannot satisfy all eight distances,
so the array uses two arrangements, where l is the lane and t the round:

| Arrangement | Position of lane l in round t | Pairs kept together | Used by |
|---|---|---|---|
| A | j = {l[4:1], t[2:0], l[0]} | distances 128, 64, 32, 16 (j bits 7..4) | stages 0–3 |
| B | j = {t[2:0], l[4:0]} | distances 8, 4, 2, 1 (j bits 3..0) | stages 4–7 |

The stream switch sits between the two groups of stages. It is a ping-pong buffer holding one
block (`hermes_block_buf`): it fills with arrangement-A rounds and reads out arrangement-B rounds.

**NTT unit (`hermes_nttu`).** An NTTU takes two streams, in1 and in2, of two coefficients each
(four lanes), and drives two BUs. Its Data Read Unit routes the operands:

| Stage type | BU1 takes | BU2 takes |
|---|---|---|
| Dependent (partners inside one stream) | in1[0], in1[1] | in2[0], in2[1] |
| Independent (partners across the streams) | in1[0], in2[0] | in1[1], in2[1] |

Results go back to the lanes they came from. The package function `nttu_lane(k, u, s, e)` gives,
for stage k, the lane of NTTU u, stream s and element e. It is chosen so that these routing rules
pair the right coefficients in every stage.

**Control unit and twiddles.** The NTTU's Control Unit sets the BU mode:

- Butterfly Mode if the stage index ≥ n_swap.
- Swap Mode otherwise.

n_swap = 2·S_part − log2 N in pass 2, and 0 in pass 1 and for N = 256. The Data Read Unit turns
(pass, block, round, lane) into the global index i of the upper operand and reads
`psi_rev[2^g + (i >> (log2 N − g))]` with g the global stage.

**Swap bookkeeping.** A run of n_swap Swap-Mode stages exchanges partners at distances
128, 64, … Afterwards the coefficient on position j is block element j XOR mask, where
mask = ((1 << n_swap) − 1) << (8 − n_swap). The NTTUs use the true element index for their
twiddles. The output buffer writes each coefficient to position j XOR mask, so the permutation is
undone before the block goes back to URAM.

**Timing.**

- Each NTTU has a latency of 5 cycles: 1 input register plus 4 in the BU.
- The stream switch adds 9 cycles: a whole block plus one.
- A round therefore leaves the array 8·5 + 8 + 1 = 49 cycles after it enters.
- The array accepts one round per cycle with no gaps between blocks.

## 4. Sequencing a transform (`hermes_ctrl`, `hermes_top`)

`hermes_top` joins the blocks as follows:

    ld_data --> URAM group 0 <--+                    +--> st_data
                     |           \                  /
                  read port     write-back     read port
                     v             |               |
              input buffer  ->  compute array  ->  output buffer
              (arrangement       (49 cycles)       (undo swaps,
               A, per-slot                          round order of
               positions)                           the write-back)
                     ^                               |
                URAM group 1 <-----------------------+

The input buffer (`hermes_block_buf`) is needed because the URAM round order and the array's
arrangement A are different permutations of the same block.

The controller's phases are:

| Phase | Cycles (N = 2^n) | What happens |
|---|---|---|
| IDLE | – | wait for `start` with `log_n` in 8..16 |
| LOAD | N/32 (plus wait cycles) | one beat of 32 consecutive coefficients per `ld_valid && ld_ready`, into group 0 |
| PASS1 | N/32 | N/256 strided blocks, 8 rounds each, one round per cycle |
| DRAIN1 | 69 | wait until the last block of pass 1 is written back |
| PASS2 | N/32 | N/256 contiguous blocks with the swap prefix (skipped for N = 256) |
| DRAIN2 | 69 | as DRAIN1 |
| STORE | N/32 | one beat per cycle on `st_data`; `done` pulses with the last one |

Pass 2 uses n_swap = 2·8 − log2 N Swap-Mode stages. N = 2^13, for example, needs Swap × 3 then
Butterfly × 5, and N = 2^16 needs none. The drain is the array latency plus the input- and
output-buffer fills. It cannot be overlapped, because pass 2 reads the block that pass 1 wrote
last.

For N = 2^16 this gives:

- 2048 + 2048 + 69 + 69 = 4234 cycles of compute;
- 2048 + 2048 cycles of load and store.

**Interface of `hermes_top`.**

- `q`: the modulus. It must be an odd prime below 2^62 with 2N | q − 1.
- `tw_ld_valid`, `tw_ld_idx`, `tw_ld_data`: write `{w, wpre}` for twiddle index k. Load
  `psi_rev[0 .. N−1]` before starting a transform of size N.
- `start`, `log_n`: begin a transform. `busy` is high until `done`.
- `ld_valid`, `ld_ready`, `ld_data[32]`: input beats. Beat b carries coefficients 32b .. 32b+31.
- `st_valid`, `st_data[32]`: output beats in the same layout. Output position i holds transform
  value NTT(a)[bitrev(i)]. The store side has no back-pressure.
- `rst_n`: asynchronous reset, active low. It clears valid bits and control state, not datapath
  registers or memories.

## 5. Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `P` | 16 | butterflies per stage; 2P lanes, P/2 NTTUs per stage |
| `N_PART` | 256 | partial NTT size; S_part = log2 N_PART stages in the array |
| `LOG_N_MAX` | 16 | largest transform; sets URAM depth 2^LOG_N_MAX / 2P |
| `COEF_W` (package) | 64 | coefficient width |

Some index fields are sized for the defaults: round counters are 8 bits and the block tag holds
16 bits of block number. Other (P, N_PART) combinations must keep log2 P ≤ S_part / 2. The array
asserts this at start-up.

## 6. Simulating

Every block has a self-checking testbench in `tb/` named `tb_<module>`. Each prints
`TB_RESULT checks=<n> failures=<m>` and has a cycle watchdog. All except the twiddle-memory
and single-NTTU tests use the default parameters.

| Testbench | What it does |
|---|---|
| `tb_hermes_top` | full end-to-end run: every N from 2^8 to 2^16 against a software NTT. It also checks that each pass takes N/32 cycles, and counts single-pass and two-pass transforms, Swap-Mode rounds, stream-switch rounds, drains and load waits. |
| `tb_hermes_ntt_core` | streams whole blocks through the array against a software model of the eight stages; checks the 49-cycle latency |
| `tb_hermes_ctrl` | drives the controller with a model of the datapath; checks every URAM address, buffer position and phase length |
| `tb_hermes_uram_group` | checks the bank mapping and conflict freedom for all N |
| `tb_hermes_bu`, `tb_hermes_nttu`, `tb_hermes_tf_mem`, `tb_hermes_block_buf` | unit tests of the smaller blocks |

With Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -y rtl --top-module tb_hermes_top \
        rtl/hermes_pkg.sv tb/tb_hermes_top.sv -o sim
    ./obj_dir/sim

`tb_hermes_top` finishes in a few seconds of wall time once compiled. The simulator has two
states, so every register that is read is reset or written before use.

## 7. How far the RTL follows the original design, and where it departs

**Taken from the original description:**

- p/2 NTTUs of two Shoup BUs per stage.
- log2 p dependent and log2 N_part − log2 p independent stages, with a stream switch between them.
- Twiddle copies per NTTU.
- A URAM group of 2p banks with the XOR fragmentation mapping, each bank 2048 deep at N = 2^16.
- 2N/N_part block iterations in two passes.
- The Swap-Mode rule for the surplus stages of the second pass.
- 64-bit coefficients.
- 128 BUs in total (16 per stage × 8 stages).

**This design's own choices, where the description gives only the function:**

- The lane arrangements A and B, and the position of the stream switch.
- The round order inside a block (`round_mask`).
- All pipeline depths.
- The block-tag format that carries the NTTU mode.
- The load/store handshake and reset behaviour.

**Departures:**

- *Load and store are not overlapped with compute.* Beats move at one per cycle, but a transform
  waits for its own load. The published throughput figures assume the HBM transfers of one
  polynomial are hidden behind the computation of another. At 300 MHz they imply about
  4,675 cycles per 2^16 transform, against 4,234 cycles of compute here plus 4,096 of load and
  store.
- *Twiddle copies are larger.* Every copy of stage k holds all indices below 2^(k+9). That is
  simple to address, but at the defaults it adds up to 8 · 2^9 · 255 = 1,044,480 words of
  128 bits (about 134 Mbit), 16 times the N-entry table. The original arrangement stores
  about log2(N_part)/2 = 4 times the N_part − 1 twiddles of one block. Its illustration gives
  each iteration (block) one twiddle slot per butterfly: S_part · N_part/2 slots, with the
  stage-0 twiddle repeated N_part/2 times, the stage-1 pair N_part/4 times each, and so on. The
  slots fit in 68 BRAM blocks, which implies each iteration's twiddles are brought in from HBM
  as the computation proceeds. How that stream is scheduled is not described. As written, the twiddle memories would not fit
  the on-chip RAM of the target FPGA. Replacing `hermes_tf_mem` with a per-NTTU compacted or
  streamed store is the main piece left to do for a real implementation.
- *Two URAM groups.* This design uses two 32-bank groups as ping-pong, i.e. 64 banks of
  2048 × 64 bit. The original resource count lists more URAM, whose use is not broken down.
- *No HBM controller and no twiddle generation.* These sit outside the accelerator: the
  testbenches play HBM and the host.

**Trust.** The end-to-end test runs the full-size design on all nine transform lengths with random
data, including the largest one. It compares every output coefficient with an independent
software NTT. Each block's testbench was also run against a deliberately broken copy of the
block, and every one of them failed.
