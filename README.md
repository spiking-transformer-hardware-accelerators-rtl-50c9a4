# Spiking transformer accelerators for a two-tier 3D stack

A spiking transformer runs a transformer on binary spikes instead of
multi-bit activations. Every layer is evaluated over several timesteps, and a
neuron carries a membrane potential from one timestep to the next. This makes
the workload different from an ordinary transformer in three ways:

* A weight times an activation is just "add the weight if the spike is 1".
  No multiplier is needed.
* The time dimension offers reuse: a weight is reused across tokens and
  across timesteps.
* Each layer has two phases that are naturally separate. First, synaptic
  integration X is the weighted sum of input spikes. Second, the neuron update
  accumulates X onto the membrane and fires when the membrane crosses a
  threshold.

The design is built around the second point and a two-die face-to-face stack.
The large memories and the neuron (spike) generators sit on the top die.
The local buffers and a dense systolic array sit on the bottom die. The array
computes X for a whole tile of output neurons x tokens x timesteps at once.
Through the short vertical wires of the stack, every PE's X register is read
by the generators in a single cycle. The generators then turn that tile into
spikes while the array already works on the next tile (kernel fusion).

There are two engines:

* **The spiking MLP engine** handles linear layers: the Q/K/V projections, the
  output projection and the feed-forward layers.
* **The spiking attention engine** handles `A = Q Kᵀ` followed by `X = A V`.
  It uses one array that switches between two modes, so the attention map is
  never written to memory.

This repository gives synthesizable SystemVerilog for both engines, their
memories and the top that holds them. The physical side of the stack has no
RTL counterpart here: tier partitioning, bond vias and 3D place-and-route.
The tier of each module is stated in its header comment.

## Neuron model

Every neuron is the discrete leaky integrate-and-fire (LIF) neuron
(`lif_unit`):

```
V = V_prev + X - V_leak
spike = (V > V_th);  if spike: V = 0
```

With `V_leak = 0` it is the integrate-and-fire (IF) neuron used in networks
converted from ANNs. The threshold and leak are run-time inputs per layer. The
membrane is kept in 20 bits (`V_W`), signed, and wraps on overflow. The width
is this design's choice, with four bits of headroom over the 16-bit integration.

## The spiking MLP engine (`mlp_accel`)

A layer computes `S_out[n,t,o] = LIF_t( Σ_i W[i,o] · S_in[n,t,i] )`. Here `n`
is the token, `t` the timestep, `i` an input feature and `o` an output feature.

### Spatiotemporal array (`mlp_array`, `mlp_pe`)

The array has H = 16 rows and W = 128 columns.

* **Rows** are output features.
* **Columns** are (token, timestep) pairs. Column `c = g·T_TILE + k` holds
  token `g` of the tile at timestep `k` of the time tile. With T_TILE = 4, one
  tile covers 32 tokens x 4 timesteps.
* **Each PE** holds three registers: a 1-bit spike, an 8-bit signed weight and
  a 16-bit integration X. Each cycle it adds its weight to X if its spike
  register is 1. It passes the spike down and the weight right, one cycle later.
* **Reuse.** A weight entering row `r` is used by all 128 columns, that is by
  every token and timestep of the tile. A spike entering column `c` is used by
  all 16 output features.

One input feature `k` is presented per cycle. The edges are skewed by
`skew_buffer` delay lines: row `r` gets its weight at cycle `k+r`, and column
`c` gets its spike at cycle `k+c`. PE `(r,c)` therefore adds feature `k` at
the clock edge `k+r+c+1`. After the last of K features, the far corner PE is
complete `K+H+W-2` cycles after the first feature entered. The sequencer waits
`H+W+2` cycles after the last feature before it extracts.

All `H·W` X registers are visible at once on `x_out`. This is the vertical
"3D extraction" that replaces a serial read-out chain. `clr` zeroes them in
one cycle, at the same time as the extraction.

### Tile loop and weight reuse

The sequencer runs the loop below. It is the published kernel-fusion loop;
the chunking detail is this design's.

```
for of in output-feature tiles      (16 features each)
  for n in token tiles              (W/T_TILE tokens each)
    for t in time tiles             (T_TILE timesteps each)
      for if in input-feature chunks (up to 96 features = local buffer depth)
        if W buffer does not hold chunk (of, if): copy it from W GLB
        copy the spike chunk (n, t, if) from Act GLB0 to the S buffer
        stream the chunk through the array, then drain
      extract the array into the spiking generators (and clear it)
```

* **W buffer tag.** The W buffer remembers which `(of, if)` chunk it holds.
  When a layer has at most 96 input features, the weights of an output tile
  are loaded once and then hit for every token and time tile. With more input
  features the buffer has to reload each chunk. `stat_wbuf_loads` and
  `stat_wbuf_hits` count both cases.
* **Timing.** Copying takes one word per cycle, with S and W in parallel.
  Streaming also takes one word per cycle. A chunk of `cs` features therefore
  takes `1 + cs + 1 + cs + (H+W+2)` cycles. A whole layer takes
  `tiles · (Σ_chunks + 1) + T_TILE + H + 2` cycles, with start and done
  included. The testbench checks this cycle by cycle.

### Spiking generators and kernel fusion (`mlp_spike_gen`)

On extraction the generators capture all `H·W` integrations in one cycle.

* **LIF units.** There is one LIF unit per (row, token), `H·W/T_TILE = 512` in
  all. Each unit walks the T_TILE timesteps of its column group in time order,
  one per cycle. This order matters, because the membrane of timestep `k+1`
  depends on timestep `k`.
* **Membranes.** Membranes persist from one time tile of a token tile to the
  next. Time tiles are the innermost tile loop around the chunks, so the next
  extract continues the same tokens. The first time tile restarts them from
  zero.
* **Write-out.** After the T_TILE steps, the H rows of spikes are written
  through to Act GLB1, one 128-bit word (one output feature) per cycle.
* **Overlap.** The generator is busy for `T_TILE + H` cycles. During that time
  the array is already loading and computing the next tile. This overlap is
  what the kernel fusion buys.
* **Stall interlock.** If a tile could finish before the generators, the
  sequencer would stall (`stat_gen_stalls`). At the built sizes this cannot
  happen, because the drain alone is longer.

### Memory layout of the MLP engine

| Memory | Word address | Content |
|---|---|---|
| Act GLB0 / Act GLB1 (3072 x 128b) | `base + (n·t_tiles + t)·D + f` | bit `c` = spike of feature `f` for column `c` of token tile `n`, time tile `t` |
| W GLB (3072 x 128b) | `w_base + of·D_in + i` | bits `[8r +: 8]` = `W[i][of·16 + r]` |
| S buffer, W buffer (96 x 128b) | chunk-relative | one word per input feature |

The output layout is the same as the input layout, so a layer's output can
serve directly as the next layer's input.

## The spiking attention engine (`attn_accel`)

Per head `h` and timestep `t` the engine computes three things:

```
A[q][k] = Σ_f Q[q][f] & K[k][f]          (0 .. d)
X[q][f] = Σ_k A[q][k] · V[k][f]
S_out[q][f] = LIF_t( X[q][f] >> shift )
```

### Reconfigurable array (`attn_array`, `attn_rpe`)

The array is 16 x 16. Rows are query tokens of a query tile, and columns are
key tokens of a key tile. Every R-PE holds a 1-bit Q register, a 1-bit K/V
register, a 5-bit attention register A and a 16-bit X register.

* **Mode 1 (`MODE_QK`)** computes `A = Q Kᵀ`.
  * Query spikes flow left to right, and key spikes flow top to bottom.
  * Each PE adds `Q & K` into A. The d features of a head stream through one
    per cycle, so A ends up as the overlap count.
  * The attention tile then stays in the array. It is never written out.
  * Edge timing: feature `f` reaches row `r` at cycle `f+r` and column `c` at
    cycle `f+c`.
* **Mode 2 (`MODE_AV`)** computes `X = A V`.
  * Value spikes flow top to bottom on the same vertical path used by K.
  * Partial integrations X enter at the left edge and flow to the right. Each
    PE adds its stored A when the value spike it holds is 1.
  * The result leaves at the right edge, with `Σ_k A[q][k]·V[k][f]` added.
  * Edge timing: V for feature `f` reaches column `c` at cycle `f+c`. X enters
    row `r` at cycle `f+r+1` and appears on `x_right[r]` at `f+r+W+1`.
  * A reverse skew buffer re-aligns the rows, so all results of feature `f`
    are available together at cycle `f+H+W`.

The attention register needs `log2(d)+1` bits: 5 bits for `d = 16`. The X
register is 16 bits wide (see "Widths" below).

### Fused loop over key and query tiles

```
for h in heads
  for t in timesteps
    for i in key tiles (16 keys)
      copy K(h,t,i) and V(h,t,i) from Act GLB0 to the K/V buffer
      for j in query tiles (16 queries)
        copy Q(h,t,j) to the Q buffer
        mode 1: clear A, stream d features, drain
        if i > 0: copy partial X(h,t,j) from X GLB to the X-in buffer
        mode 2: stream V and X-in (or zeros when i = 0), collect X-out
        write X-out back to X GLB
    spiking generators: X GLB -> spikes in Act GLB1
```

* **Reuse.** Keys and values are loaded once per key tile and reused by every
  query tile.
* **Bypass.** The X reload is skipped for the first key tile, because the
  partial sum is still zero at that point.
* **Counters.** `stat_mode_switches`, `stat_x_bypass`, `stat_x_reloads` and
  `stat_kv_loads` count these events.
* **Features are not tiled.** All `d` features of a head go through at once.
  K and V share the 96-word K/V buffer, so `d <= 48`.
* **Timing.** One (h,t) pass takes
  `nk(2d+1) + nk·nq·(4d + d·XH + 2 + 2(H+W+2)) + (nk-1)·nq·(d·XH+1) + d·nw + 4`
  cycles, where `nk`/`nq` are key/query tiles, `XH = 2` GLB words per 16-token
  X column and `nw = tokens/8`. The testbench checks this formula.

### Spiking generators with shift (`attn_spike_gen`)

After all tiles of an (h,t), the generators read X GLB one word per cycle.
One word holds 8 tokens x 16 bits.

* **Shift.** Each X is shifted right by `cfg_shift`. This is the "Shift" step
  of spiking self-attention, which scales the product before the neuron; 0
  turns it off.
* **LIF update.** Eight LIF units update eight neurons per cycle. Membranes
  are kept in a 768-word memory with the same addressing as X GLB, so each
  (token, feature) neuron of a head keeps its membrane across timesteps.
* **Write-out.** Spikes are packed one bit per token and written to Act GLB1,
  one word per feature.

### Memory layout of the attention engine

| Memory | Word address | Content |
|---|---|---|
| Act GLB0 (Q, K, V), Act GLB1 (Y) | `base + t·D + h·d + f` | bit `n` = spike of token `n`, feature `f` (so at most 128 tokens) |
| X GLB (3072 x 128b) | `f·nw + j·2 + p` | 8 tokens x 16 bits of X, part `p` of query tile `j` |
| Q buffer, K/V buffer (96 x 128b) | feature index (K at 0.., V at d..) | one word per feature |
| X-in, X-out buffers (96 x 256b) | feature index | 16 query tokens x 16 bits |

## Widths and sizes

| Item | Value | Origin |
|---|---|---|
| MLP array H x W | 16 x 128 | published main configuration |
| MLP weight / integration | 8b / 16b | published |
| Attention array | 16 x 16 | published main configuration |
| Attention register A | 5b | published rule log2(d)+1 for d = 16 |
| Attention integration X | 16b | published table; see below |
| Global buffers | 3072 x 128b | published |
| Local buffers | 96 x 128b (S, W, Q, K/V), 2 x 96 x 256b (X) | published (W buffer size assumed equal) |
| Membrane width | 20b | own choice |
| T_TILE (timesteps per MLP tile) | 4 | own choice; not published |
| Memory layouts, host port, schedules | — | own choice |

For the attention X width, the publication's sources disagree. Its
bit-width discussion arrives at 10 bits for an 8-head, 128-feature,
128-token model. Its tables list the attention design as 16-bit. This RTL
uses 16 bits:

* It is what the published tables report.
* It fills the 256-bit X buffer word exactly (16 tokens x 16 bits).
* It covers the general bound `log2(d)+log2(N)+2`.

## Where this RTL goes beyond or departs from the publication

* **Own schedules.** The publication gives the loop nests, the dataflow
  and the PE contents. The cycle-level schedule is this design's own. It runs
  load, then compute, then drain per chunk, in sequence, with explicit drain
  waits. A real chip might overlap buffer loading with streaming (double
  buffering), and that is not done here.
* **No X reload for the first key tile.** The published loop always reloads
  the partial X; here zeros are fed instead. Results are identical.
* **Features are not tiled in attention.** The input-feature loop of the
  attention kernel is not tiled, which limits a head to 48 features (16 in the
  main model).
* **Tokens per attention run.** Attention supports at most 128 tokens per
  run, because one spike word holds one feature of all tokens.
* **One weight GLB.** One figure labels the weight buffer "W GLB0"; the text
  has a single W GLB, and one is built.
* **Signed weights.** Weights are signed two's complement. Integrations and
  membranes wrap rather than saturate.
* **Memory model.** SRAM macros are modelled by `sram_2p`: one read and one
  write port, 1-cycle read latency, and old data on a read-during-write. The
  real compiler macros' ports are not published.
* **Host interface and counters.** The host port, the start/busy/done
  handshake and the statistics counters are additions that make the engines
  usable and testable.
* **Write-through granularity.** The MLP generators write spikes to Act GLB1
  once per time tile (T_TILE timesteps packed in one word), not after every
  single timestep.
* **Rest of the network.** The residual additions, the spiking tokenizer and
  the classification head of a spiking transformer have no hardware in this
  design. Concatenating the heads needs none: the attention output of all
  heads lands in one buffer in the layout the next MLP layer reads.
* **Shared top.** The two engines are published as separate accelerators.
  `st3d_top` only places them side by side. A host moves spike words between
  them.
* **Not in the RTL.** Not modelled: face-to-face bonding, tier partitioning,
  and memory-on-logic versus logic-on-logic placement. The alternative array
  sizes of the evaluation (64 x 16 MLP, 16 x 8 attention, 4b/12b) are reachable
  through parameters but were not simulated.

## Capacity at the default sizes

For the 8-head, 128-feature, 128-token model used as the running example:

* **Attention fits.** Each head has `d = 16` features and there are 128 tokens
  per word. A attention values stay <= 16 (5 bits), and X stays <= 2048. Q, K
  and V need `3·T·128` words of Act GLB0, so up to T = 8 timesteps fit in one
  run.
* **128 -> 128 projections fit.** They need 1024 W GLB words and `128·T`
  activation words.
* **A whole self-attention block runs.** `tb_ssa_block` runs it for 4
  timesteps: W_Q, W_K and W_V projections, 8-head attention, and the W_O
  projection. Each 128 -> 128 layer takes 17,718 cycles, and the attention
  layer takes 415,873 cycles.
* **A 4x-wide feed-forward layer does not fit in one run.** A 128 -> 512
  layer needs 4096 weight words, more than 3072. Split it over two runs by
  output features.

## Files

* `rtl/st3d_pkg.sv`: sizes, `glb_sel_e`, `attn_mode_e`.
* `rtl/lif_unit.sv`: LIF/IF neuron.
* `rtl/sram_2p.sv`: SRAM macro model.
* `rtl/skew_buffer.sv`: systolic edge skew and de-skew.
* `rtl/mlp_pe.sv`, `rtl/mlp_array.sv`, `rtl/mlp_spike_gen.sv`,
  `rtl/mlp_accel.sv`: the MLP engine.
* `rtl/attn_rpe.sv`, `rtl/attn_array.sv`, `rtl/attn_spike_gen.sv`,
  `rtl/attn_accel.sv`: the attention engine.
* `rtl/st3d_top.sv`: both engines.
* `tb/tb_<module>.sv`: one self-checking testbench per module.
* `tb/tb_ssa_block.sv`: a whole spiking self-attention block on the full-size
  design.

## Simulating

Each testbench is stand-alone. Build and run it with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    --top-module tb_mlp_accel rtl/st3d_pkg.sv tb/tb_mlp_accel.sv -Mdir obj -o sim
./obj/sim
```

Every testbench prints `TB_RESULT checks=N failures=M` at the end and has a
cycle watchdog.

* **Reference models.** Each testbench computes the expected results with a
  plain behavioural model: weighted sums, AND counts and LIF updates in
  testbench code.
* **Cycle counts.** The accelerator testbenches also check the cycle count
  against the schedule formulas given above.
* **Reduced sizes.** Block-level testbenches override parameters to small
  arrays (for example a 4 x 8 MLP array with 8-word buffers), so that chunking,
  weight-buffer hits, X reloads and generator overlap all happen in a short
  run.
* **Full size.** `tb_st3d_top` runs the top at its full default size. It
  drives two MLP layers and one multi-head attention layer, in parallel, and
  counts the mechanisms: chunking, weight-buffer loads and hits, generator
  overlap, mode switches, X bypasses and reloads. It runs for about two minutes.
* **Whole block.** `tb_ssa_block` runs a complete spiking self-attention block
  of the 128-feature, 8-head, 128-token example at the default sizes, with the
  host rearranging spikes between the engines. It makes 327,703 checks, covering every output spike
  and every layer's cycle count, and runs for about three minutes.

Verilator's `-Wall` lint reports that `rst_n` is used both as an asynchronous
reset and in the `disable iff` of the protocol assertions. This is expected:
the assertions are simulation-only checks.

## Changing the design

* **Array sizes and widths.** These are module parameters, with defaults in
  `st3d_pkg`.
* **Constraints on the MLP engine.** `W` must be a multiple of `T_TILE`.
  `H·W_W` and `W` set the widths of the W and S buffer words.
* **Constraints on the attention engine.** `H·X_W` must be a multiple of
  `GLB_W`. `GLB_W/X_W` sets the number of generator lanes.
* **Memory sizes.** Set `GLB_DEPTH` and `BUF_DEPTH` on each engine.
* **Elaboration checks.** `st3d_top` checks at elaboration that its default
  sizes match the 128-bit and 256-bit buffer macros.
