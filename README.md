# SkipOPU core in SystemVerilog

## The idea

Large transformer LLMs spend the same work on every token in every layer,
although many tokens hardly change as they pass through a layer. Dynamic
layer skipping puts a tiny router in front of each attention and each
feed-forward sub-layer. For each token the router computes two logits with
a linear projection and takes the larger one. If the token is *skipped*, it
bypasses the sub-layer through the residual connection. If it is
*unskipped*, it is computed as usual. About a quarter of the token/sub-layer
pairs can be skipped this way.

Three problems appear when this runs on hardware:

1. **Irregular rows.** The skip decision is known only after the router's
   matrix product. The rows that enter the matrix unit and the normalisation
   therefore change from layer to layer.
2. **Nonlinear work in the critical path.** RMSNorm before the router, the
   router argmax and the attention softmax all need whole-row statistics.
3. **Ragged KV cache.** A skipped token writes no key/value (K/V) entry in
   that layer. Attention in a later layer still needs a K/V entry for every
   context token, so a skipped token reuses the entry of the last layer in
   which it was computed. Fetching those entries jumps across layers and
   memory regions.

This core answers each problem with one mechanism:

- **A bitmask that drives the datapath** (`bitmask_unit`). Router results
  become a per-row bitmask. Only unskipped rows are fetched from the global
  buffer into the PE array and the nonlinear engine. Only unskipped rows are
  written back, so skipped rows keep their residual value.
- **A mixed-precision PE array fused with a tile-wise nonlinear engine**
  (`pe_array`, `npe`). Each DSP slice computes two products per clock,
  either FP16×FP16 or FP16×INT4. Row statistics for RMSNorm and softmax are
  gathered tile by tile while the data streams, and applied in a second pass.
- **Token-wise KV placement with an invariance buffer** (`kv_*`). Each
  token's K/V entry lives whole in one HBM pseudo-channel, assigned round
  robin by rank. The entries that the next layer will reuse are copied into
  an on-chip buffer while the current layer reads them. A scheduler packs the
  fetches into conflict-free rounds.

## Block map

```
                  cmd_* (decoded commands)
                          |
                  +---------------+
  ker_* --------> | KER ping-pong |--load--> PE array 64x64 --> 128 BFP trees --> PSUM accumulator
  gb_ext_* <----> | global buffer |--rows--> (mp_pe, bfp_acc_tree)                 |     |    |
                  +---------------+   ^                                              |     |    +--> PSUM ping-pong --> psum_rd_*
                      ^     |         | bitmask unit <---- router logits (cols 0,1)--+     |
                      |     +--rows-->| NPE (RMSNorm, softmax, SwiGLU, RoPE)             |
                      +-- write back (unskipped rows only) <-------------------------------+
                                                                                          |
                      K/V rows --> kv_demux --> hbm_wr_* (32 ports)  <--------------------+
   hbm_rd_* (32 ports) <--> kv_subsystem (scheduler, invariance buffer 16 banks, 48x16 xbar) --> kv_out_*
```

The host, its compiler, PCIe, the AXI interconnect, the DDR4 and HBM
controllers, the clock-crossing FIFOs, the DMA engines and the instruction
decoder are outside this RTL. Their sides of the core are the ports named
above.

## The KV cache path (the hardest part)

### Where an entry lives

A token that is computed in layer `l` gets a *rank*: its position among the
tokens computed in layer `l`, counted in token order. Its K and V vectors
(`SPAN` = 256 beats of 256 bits each for a 4096-wide model) go to:

```
port = rank mod 32
addr = 32 B * ( l * SLOTS * 2*SPAN  +  (rank div 32) * 2*SPAN  +  is_v * SPAN  +  beat ),   SLOTS = MAX_TOKENS / 32
```

Each layer restarts the round robin at port 0. `kv_addr_map` computes this
and `kv_demux` uses it to send new entries to their write port.

### Which entry a token presents to layer i

`kv_subsystem` keeps one history bit per (token, layer): was the token
computed there? The entry used for layer `i` is the one from
`l* = last layer <= i` whose bit is set. If no such layer exists, layer 0 is
used; this design assumes every token has a layer-0 entry. Since the
scheduler walks tokens in index order, the rank of a token in `l*` is a
running per-layer count of set bits passed so far. No table of ranks is
stored.

### The invariance buffer

Suppose token `t` is skipped in layer `i+1`. Then its entry for layer `i+1`
is the same one it used for layer `i`. The decision for layer `i+1` is known
before layer `i`'s attention runs, because the routing of all earlier tokens
was fixed while the previous token was produced. So while layer `i` fetches
an entry, the core already knows whether layer `i+1` will reuse it. If so,
the core also writes the entry into the on-chip buffer. The next layer then
reads it from there instead of from a random HBM location.

Buffer layout (`kv_inv_buf`):

- 16 banks, each with one read port and one write port, and 256 bits wide.
- Each bank has two halves selected by layer parity. One half is read for
  layer `i` while the other is filled for layer `i+1`.
- Each half holds 32 slots of 512 beats, which is one K+V entry per slot.
- Total size: 16 banks × 2 halves × 32 slots × 512 beats × 32 B = 16 MiB.
  That is 512 UltraRAMs, or 1024 entries in all.

The buffer is valid for a fetch only if the previous fetch was for the
previous layer and it did not overflow. A layer whose attention is skipped
invalidates it.

### Rounds (`kv_scheduler`)

One decode attention reads one entry per context token. Each token is served
from exactly one source:

- **HBM** if the token is computed in this layer (a fresh entry) or the
  buffer is invalid.
- **The buffer** otherwise, at the bank and slot recorded when the entry was
  written.

The scheduler takes tokens in index order and adds each one to the current
round. It closes the round before a token that would cause any of:

- two tokens on the same HBM port;
- two buffer reads from the same bank;
- more buffer reads than the 16 read ports;
- more buffer writes than the 16 write ports.

A token needs a buffer write when the next layer skips it. Buffer writes go
to bank `n mod 16` and slot `n div 16`, where `n` counts the writes of this
fetch. If no slot is left, the token is not buffered and the overflow flag is
set. The next layer then reads everything from HBM.

The paper's worked example only gives the resulting schedules, for 4 HBM
ports, 2 buffer ports and 16 tokens. This rule reproduces both exactly. With
the buffer valid, the rounds are {0–4}, {5–9}, {a–f}. With it invalid (all
from HBM), they are {0,1,2}, {3–6}, {7,8}, {9,a,b}, {c,d}, {e,f}. `tb_kv_scheduler` checks
both.

### Executing a round

A round moves its entries one beat at a time:

- All of the round's HBM ports and buffer banks are read for beat `b`.
- The gathered beat appears on `kv_out_*`: `HBM_PORTS + BUF_BANKS` lanes,
  each tagged with its token and beat.
- The 48×16 crossbar `kv_xbar` sends each entry that needs buffering from its
  source lane to its write bank.

Tokens inside a round come out in port order, not token order. Attention
does not care about the order of its keys, provided the scores and values
are kept together; the tags give the order.

## The mixed-precision PE

A DSP48-style slice computes `P = (D ± A) * B + C`. One FP16 significand is
11 bits, so two weight significands `u0` and `u1` packed 16 bits apart
overlap the 22-bit products. `mp_pe` packs them anyway ("overpacking"):

1. `D` gets `u0` without its LSB.
2. `A` gets `u1` without its MSB, shifted by 16, and the pre-adder
   subtracts it.
3. `C` puts back the lost LSB of `u0`, the lost MSB of `u1`, and a 5-bit
   correction (`u1[4:0]·w[4:0] mod 32`). The correction cancels the
   interference of the low product in bits 16–20. In hardware it is a small
   INT5 multiplier.

After this, the low field of `P` is `u0·w` and the high field is `−u1·w`.
Both are exact in the bits that are kept, and each keeps its top 15 bits.
Signs are XORed and exponents added outside the DSP.

In INT4 mode the two 4-bit weights are packed normally. Weight scaling is the
`fraclen` input: an INT4 value `q` means `q·2^(fraclen−18)`.

`bfp_acc_tree` adds the 64 products of a column as a block-floating-point
sum:

- a max tree finds the largest exponent;
- every significand is shifted right to that exponent;
- an integer adder tree sums them;
- the result is normalised back to FP16.

Everything truncates; nothing rounds.

## The nonlinear engine

`npe` processes one row of `LANES` = 64 values per clock. It has two shared
reduction units. Each has a FIFO holding one running feature per row of the
row block (sum, sum of squares, running max, running exp-sum). The FIFOs let
statistics build up tile by tile as the row's chunks stream past.

- **RMSNorm:** phase 1 collects the sum and the sum of squares. Phase 2
  applies `(x − μ)/σ·γ` or `x/rms·γ` (the `rms_center` input) using the
  finished statistics. With the bitmask, phase 2 reads only the statistics
  of unskipped rows, so phase 1 can run before the router has decided.
- **Softmax:** phase 1 is an online max/exp-sum. When a new tile raises the
  max, the old sum is rescaled by `exp(old − new)`. Phase 2 computes
  `exp(s − m)/l`, with the scores scaled by `1/sqrt(d_k)`.
- **SwiGLU and RoPE** are single-pass. RoPE reads cos/sin from a rotation
  memory loaded through `rot_*`.

Internally the engine uses Q16.16 fixed point, converting at the FP16
ports. `exp` is computed as a power of two with a quadratic for the
fractional part, about 0.2 % error. This number format limits precision:

- Softmax outputs are truncated to multiples of 2^-16.
- For a score row of 2048 entries, each output is around 1/2048, so it
  carries only about 5 significant bits.
- The testbenches use rows up to 64 scores wide.

## Running the core

`skipopu_top` executes one decoded command at a time:

| Command | Action |
| --- | --- |
| `C_LOAD_W` | Load a weight tile into the PE array. |
| `C_MATMUL` | Stream global-buffer rows (unskipped only, optionally) through the array into PSUM. |
| `C_ROUTER` | Turn PSUM columns 0/1 into the bitmask and the KV history. |
| `C_WB` | Write PSUM back, skipping skipped rows. |
| `C_NPE` | Run one NPE operation in place. |
| `C_KV_WR` | Send K/V rows to HBM through the DEMUX with their ranks. |
| `C_OFFLOAD` | Copy PSUM into the PSUM ping-pong buffer. |
| `C_ATTN` | Fetch one layer's KV cache. |

The header of `rtl/skipopu_top.sv` documents each command's fields. The
paper's instruction set is not public, so this command set is this design's
own.

A typical attention sub-layer for one 64-token row block runs:

1. RMSNorm statistics.
2. Router matmul and `C_ROUTER`.
3. RMSNorm normalisation of unskipped rows.
4. Q/K/V matmuls with `use_bm`.
5. RoPE.
6. `C_KV_WR` (with `commit` on the last tile).
7. `C_ATTN`.
8. Softmax.
9. Output projection.
10. `C_WB` with `use_bm`.

## Where this RTL departs from the paper or fills gaps

- **Overpacking taps.** The paper's PE figure draws the output taps at
  P[21:7]/P[38:24] and labels the D input with the other weight. Its text and
  arithmetic give the packing used here. With the figure's taps the two
  products are not exact.
- **Normalisation statistic.** The figure computes variance as
  E[x²] − μ² over the whole row. The algorithm listing updates a variance per
  tile. The figure was followed. Centred and uncentred RMSNorm are both
  offered.
- **No IFM buffer.** There is no separate IFM ping-pong copy. Activations go
  straight from the global buffer to the array.
- **PSUM accumulator.** Partial sums across reduction tiles are added in FP16
  next to the array.
- **Router sampling.** The router takes the argmax of its two logits. The
  Gumbel sampling used in training is not modelled, and ties skip.
- **KV fetch pipelining.** The KV fetch moves one beat at a time in lock
  step. The next beat's requests wait for the slowest port, so the HBM
  request pipeline is not modelled.
- **Tokens never computed.** A token computed in no layer so far uses its
  layer-0 entry.
- **Invariance buffer sizing.** The buffer keeps two parity halves, so it
  offers 512 reusable entries per layer. Reused tokens beyond that come from
  HBM.
- **Llama2-13B entries.** A 5120-wide model's K/V entry is 320 beats. The
  default `SPAN` = 256 sizes the entries for a 4096-wide model. For 13B,
  build with `SPAN = 320`, with `ENTRY_BEATS` following as 2·SPAN. The buffer
  then needs 20 MiB, more than 512 UltraRAMs.
- **Defaults chosen here.** These sizes are defaults of this design, not
  from the paper: a 2048-token context, 40 layers, and an 80-chunk hidden
  vector (5120).

## Verification

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. Highlights:

- `tb_mp_pe` compares both products exactly against integer arithmetic over
  random and corner operands.
- `tb_kv_scheduler` checks the two published schedules, then random
  sequences against a reference implementation of the rule.
- `tb_kv_subsystem` runs several layers of routing history through a model
  of HBM and checks every delivered beat and every buffered entry.
- `tb_skipopu_top` takes a reduced core (8 rows, 4 HBM ports, 2 banks)
  through four routed layers. The layers cover RMSNorm, router and bitmask,
  masked matmul and write-back, RoPE, softmax, SwiGLU, PSUM offload and K/V
  writes, plus five KV fetches with the buffer valid and invalid. It also
  counts that each mechanism was really exercised.
- `tb_skipopu_full` runs the same scenario on the core at its default size:
  64×64 PEs, 5120-wide rows, 32 HBM ports, 16 banks and a 64-token row block.
  It simulates in about three minutes in Verilator, after a C++ build of a
  few minutes.

To run one testbench with Verilator 5:

```
verilator --binary -Wno-fatal --top-module tb_kv_scheduler \
    rtl/skipopu_pkg.sv rtl/*.sv tb/tb_kv_scheduler.sv
./obj_dir/Vtb_kv_scheduler
```

List `rtl/skipopu_pkg.sv` first. If your shell expands `rtl/*.sv` to include
it a second time, drop it from the glob. Simulation is two-state, and all
stimulus comes from `$urandom`.
