# Silentflow COT generation accelerator

Secure two-party computation consumes large numbers of *correlated
oblivious transfers* (COTs). A COT is a pair of 128-bit values shared
between two parties. The sender holds `y`, the receiver holds a bit `x`
and `z`, and the two satisfy

    z = y XOR (x AND Delta)

where `Delta` is a secret 128-bit value known only to the sender. Silent
OT extension produces millions of COTs from a small seed correlation
without sending them over the network. It does this in two steps:

1. **Sparse part.** Expand one *GGM tree* per block of outputs. A GGM tree
   is a binary tree of AES-generated seeds. The sender sees every leaf. The
   receiver sees every leaf except one hidden leaf per tree.
2. **Dense part.** Add a *sparse linear mapping* (an LPN encoding) of a
   short seed vector `k` of length K. Every output is the XOR of D
   pseudo-randomly chosen entries of `k`.

This design is a hardware engine for both steps, built for small
devices with little on-chip memory. Its main idea is that neither step
needs its full working set on chip:

- **Blocked on-chip expansion (BOX).** Each GGM tree is expanded in
  depth-S slices called *subtrees*. A subtree block takes one root from
  memory and keeps all of its intermediate levels in registers. Only the
  subtree's 2^S bottom nodes go back to memory. The next pass then uses
  those nodes as roots.
- **Feedback-free index generation for the dense part.** The random
  indices for every output come from a closed-form function of the
  output number and a public seed. No index depends on the previous one,
  so the engine can keep many memory reads in flight and XOR the
  results as they return.
- **Overlapping the two steps (kernel fusion).** The sparse and dense
  parts run at the same time on separate memory ports. A final stage XORs
  their results together, so the run takes about
  max(GGM, VM) + XOR instead of their sum.

With its default parameters, one run produces N = 2^20 COTs per party:
T = 256 trees of height H = 12, an input vector of K = 32771 elements,
and D = 10 indices per output.

## The correlation being produced

Each party's device is loaded with the following values.

| Value | Sender | Receiver |
|---|---|---|
| seed vector in memory | `v[0..K-1]` | `w[0..K-1]` = `v XOR u*Delta` (it also holds the bits `u`) |
| per tree `t` | the root seed | the hidden leaf index `alpha_t` and the value `m_t = leaf_t[alpha_t] XOR Delta` |
| per tree `t`, per level `L` | — | the seed of the off-path sibling at level `L` |

Both parties share the two AES keys of the tree (one for left children,
one for right children) and a public 32-bit seed `a_seed` for the sparse
matrix `A`.

Each device computes `out[c] = leaf[c] XOR (seed vector * A)[c]`. This
gives:

- on the sender, `y = s XOR v*A`;
- on the receiver, `z = r XOR w*A`.

Here `s` and `r` are the two parties' leaves. They agree everywhere except
at each hidden leaf, where `r = s XOR Delta`. Therefore `z = y XOR x*Delta`
with `x = e XOR u*A`, where `e` is one at each hidden leaf. The engine
produces the 128-bit values. The receiver's bit vector `x` is a 1-bit
version of the same computation, and it is not computed on chip.

Trusted hardware on the host (an enclave) supplies the per-tree inputs
in the table above. It also runs the setup that creates `v`, `w`, `u`
and `Delta`. Those steps are outside this RTL. Here they appear as a
request/acknowledge port (`tee_*`) and as memory contents.

## GGM trees and the node function

A node at level `L` with index `i` has two children at level `L+1`:

    child(2i)   = AES_k0(node)
    child(2i+1) = AES_k1(node)

The node is encrypted under two fixed keys. There is no feed-forward XOR
of the parent. Leaves are at level `H`. Tree `t`'s leaf `e` is output
number `t*2^H + e`.

**Receiver puncturing.** The receiver does not know the root. For each
level `L`, it receives the seed of the off-path sibling, which is the node
`(alpha >> (H-L)) XOR 1`. It then works as follows:

- Nodes on the hidden path are forced to zero. At the leaf level, the
  hidden leaf is forced to `m`.
- The off-path sibling at each level is replaced by the seed it received.
- Every other node is expanded normally.

The resulting leaves equal the sender's leaves, except at `alpha`.

**Level sums.** While expanding a tree, the engine XORs all left
children and, separately, all right children of every level. It outputs
them as `sum0[L]` and `sum1[L]` when the tree finishes. The
punctured-tree protocol uses these sums as correction words. The sender's
sums can also serve as a consistency check.

## AES pipeline (`aes_pipe`, `aes_round`, `aes_sbox`, `round_key_mem`)

`aes_pipe` is a fully unrolled AES-128 encryption with one stage per
round. It has 11 stages: the initial key XOR followed by 10 rounds. It
accepts one block per cycle, returns it 11 cycles later, and has no
stall input. A tag travels with each block, so the caller can recognise
results.

- Each stage runs SubBytes, ShiftRows and MixColumns (no MixColumns in the
  last round), then XORs in that round's key as the final operation of the
  stage.
- The round keys are not expanded on chip. `round_key_mem` holds the two
  precomputed 11-entry schedules. Slots 0–10 belong to the left-child key
  and slots 11–21 to the right-child key. The host writes them once before
  `start`.
- The S-box is a constant table built at elaboration time from its
  definition (GF(2^8) inverse plus affine map). It is not loaded from a
  file.
- Byte 0 of the AES state is bits [127:120] of `blk_t` (FIPS-197 byte
  order).

## Subtree block (`subtree_block`)

A subtree block expands one root at level `L0` into the 2^S nodes at
level `L0+S`. The nodes are stored in a heap-ordered register array,
where node `n` has children `2n` and `2n+1`. Two `aes_pipe` instances run
side by side, one per child key. The block works level by level:

1. Issue one parent per cycle into both pipelines.
2. Wait until the whole level has come back (a level barrier). The
   pipelines are 11 deep, and the first levels have fewer than 11
   parents, so waiting costs little.
3. As children return, apply the receiver masking above. This uses the
   absolute level and index of each child, computed from `root_lvl` and
   `root_idx`. The children are also XORed into `lvl_xor0/1`.
4. After the last level, write the bottom nodes out four per 512-bit
   word, starting at `wb_base`.

A job takes `(2^S - 1) + 11*S + 2^S/4 + 2` cycles with a memory that
accepts every write. With S = 4, that is 65 cycles for 16 nodes.

## GGM unit (`ggm_unit`)

For each tree, the GGM unit takes the following steps:

1. Ask the trusted side for the tree's inputs (`tee_req` / `tee_ack`).
2. Run `H/S` passes. Pass `p` starts from all nodes at level `p*S`:
   - The first pass starts from the single root.
   - Later passes read their roots from a **scratch area** in memory,
     which holds one level of the tree in node order (node `j` of level
     `L` at word `scratch_base + (2^L + j)/4`, lane `(2^L + j) mod 4`).
3. Send roots to the P subtree blocks, giving each new root to the first
   idle block. Subtrees of the same pass are independent, so the blocks
   run in parallel.
4. Send the write-backs of the last pass to the leaf array instead:
   `leaf_base + (t*2^H + e)/4`.
5. Pulse `tree_done` and present the tree's 2·H level sums.

All blocks share the unit's one memory port:

- Write-backs win arbitration over root reads.
- Only one root read is outstanding at a time.

One pass completes before the next pass starts reading its roots.

H must be a multiple of S, and the first pass must have fewer than 2^S
roots. Peak on-chip storage per block is one subtree of `2^(S+1)` nodes,
independent of H. The paper reports 160 KB of local memory for its FPGA
build with S = 4. It counts BRAM used for buffering by the HLS tool, which
this RTL does not reproduce.

## Sparse linear mapping (`vm_unit`, `mlfsr`)

Output `c` is split into a batch number `i = c - c mod BATCH` and a
position `l = c mod BATCH`. Its D indices into `k` are computed as
follows:

    s     = mlfsr(a_seed + (i+1)*(l+1), aux = 1)
    r_j   = mlfsr(mlfsr(s + 2^j + i + j, aux = j), aux = s)   j = 0 .. D-1
    idx_j = (r_j[31:16] * K) >> 16

`mlfsr` is a 32-bit Fibonacci LFSR with the polynomial
x^32 + x^22 + x^2 + x + 1. It runs 32 steps in one combinational block,
and step `t` XORs bit `t` of `aux` into the feedback. Because the seed is
a plain function of `(i, l, j)`, index generation never waits on an
earlier result. The second pass, keyed by the column seed `s`, is needed.
With a single pass, nearby `j` often land on the same upper 16 bits, and
about a fifth of the indices in a column repeat. A repeated index cancels
in the XOR, so the column then has fewer than D nonzeros. With the second
pass, no repeats appear in 20,000 sampled indices at K = 32771.

The VM unit processes outputs in batches of BATCH:

- It issues one read per cycle for the word that holds `k[idx_j]`. Up to
  MAXOUT reads can be outstanding.
- A small queue remembers which lane of the returning word to use.
- An accumulator XORs the D values of the current output in arrival
  order. This is a pipelined reducer: no read-modify-write of the output
  in memory.
- Each finished output goes into a BATCH-entry buffer. At the end of the
  batch, the buffer is written out four elements per word.

Throughput is one `k` read per cycle when memory keeps up. That makes
about N·D cycles for the whole vector, plus N/4 write cycles.

A second variant suited to larger devices is not built. It keeps `k` on
chip and reduces the D values with a parallel tree.

## Final XOR and top level (`final_xor`, `silentflow_top`)

`start` launches the GGM unit and the VM unit together. Each unit drives
its own memory port. When both have finished, `final_xor` streams over
the N/4 words as follows:

1. Read the leaf word.
2. Read the VM word.
3. XOR them.
4. Write the result to `out_base`.

`done` pulses when the last word has been written.

The top has three memory ports: GGM, VM and XOR. Each speaks the same
simple protocol:

- A request `{valid, we, addr, wdata}` is taken when `ready` is high.
- Read data returns in order with `rvalid`, after any latency.
- `addr` is a 512-bit word address.

Arbitration onto a single DRAM port is left to the system.

The memory layout is set by base-address inputs. The testbenches use:

| Region | Size (words) |
|---|---|
| `k` | ceil(K/4) |
| scratch | 2^(H-S+1)/4 + 1 |
| leaves | N/4 |
| VM result | N/4 |
| output | N/4 |

## Parameters

| Parameter | Default | Where it comes from |
|---|---|---|
| `H` (tree height) | 12 | Inferred from the paper's explored subtree depths of 3, 4, 6 and 12, which are the divisors of 12 |
| `S` (subtree depth) | 4 | The paper's main configuration |
| `T` (trees) | 256 | N / 2^H |
| `P` (subtree blocks) | 2 | This design's choice |
| `K` | 32771 | The paper's evaluation size |
| `N` | 2^20 | The paper's evaluation size (derived as `T << H`) |
| `D` | 10 | Not given; this is a common choice for this LPN code family |
| `BATCH` | 256 | The paper's best batch size |
| `MAXOUT` | 16 | This design's choice (outstanding VM reads) |

A run at the defaults generates 2^20 COTs. Other workloads need the
following:

- Smaller runs, such as 2^14 for design-space exploration, only change T.
- A 10^7-COT workload needs 10 runs (or T = 2442).

## Where this design departs from the paper

- **Node function.** The paper shows a software-style AES expansion. This
  RTL uses two keyed AES calls without a parent XOR. Any
  length-doubling PRG could be substituted in `subtree_block`.
- **Index generation.** The paper's VM pseudo-code seeds each output from
  the iteration index and a per-party seed array. Here a public seed
  replaces that array, because both parties must use the same matrix `A`.
  The exact arithmetic is this design's own.
- **Unspecified details.** The paper gives no LFSR width, polynomial, D, H
  or number of parallel subtree blocks. The values above are choices made
  here.
- **Not built:**
  - the trusted-side enclave;
  - the AES key schedule (keys are loaded);
  - the receiver's choice-bit vector;
  - the parallel-reducer VM variant.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>`, has a watchdog, and checks against an
independent reference model in `tb_ref_pkg.sv`. The reference model has
its own AES built from GF(2^8) log/exp tables, its own GGM node function
and its own index generator.

| Testbench | What it checks |
|---|---|
| `aes_pipe_tb` | FIPS-197 vectors, random blocks, tags, one-per-cycle streaming |
| `round_key_mem_tb` | writes, reset, and ignored out-of-range addresses |
| `mlfsr_tb` | 3000+ random seed/aux pairs against a bit-serial model |
| `subtree_block_tb` | both roles, all masking cases, level sums, write-back stalls, exact job latency |
| `ggm_unit_tb` | whole trees of height 8 with S = 4 (two passes), every leaf and level sum, both roles, memory stalls |
| `vm_unit_tb` | every output against the reference indices, with random memory latency and stalls |
| `final_xor_tb` | every word of the output |
| `silentflow_top_tb` | one sender and one receiver at reduced size: every output and the COT relation `z XOR y = x*Delta` |
| `silentflow_top_full_tb` | the same at the default parameters (2^20 COTs per party), sampling 4096 random positions plus every hidden leaf |

`silentflow_top_tb` runs at reduced size: H=4, S=2, T=2, K=13, D=4,
BATCH=8. It also counts each mechanism and fails if any never happened:

- cycles in which GGM and VM were busy together;
- cycles in which both subtree blocks were busy;
- root reads from the scratch area;
- memory stalls;
- verified hidden leaves;
- finished trees.

At the default size, both parties finish in about 13.3 million cycles.
GGM and VM overlap for 4.6 million of those cycles, and the VM part sets
the length. That run takes under two minutes in Verilator.

The memory model (`tb_mem`, `tb_mem3`) adds fixed latency and random
back-pressure.

To run a testbench with Verilator (5.x):

    verilator --binary --timing --assert -Wno-fatal \
      rtl/sf_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv tb/tb_mem.sv tb/tb_mem3.sv \
      tb/silentflow_top_tb.sv --top-module silentflow_top_tb -o sim
    ./obj_dir/sim

Lint gives two known warnings, and both are deliberate:

- the low half of the last LFSR output in `vm_unit` is unused, because
  only the top 16 bits pick an index;
- assertions use the asynchronous reset in `disable iff`.
