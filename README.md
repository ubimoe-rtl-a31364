# UbiMoE-style MoE Vision Transformer accelerator in SystemVerilog

A mixture-of-experts vision transformer (MoE-ViT) layer has two very different halves:

- **Multi-head self-attention (MSA).** Its computation is fixed, dense and latency bound. The softmax inside it is the hard part.
- **MoE feed-forward.** A gate network sends each patch (token) to K of E expert MLPs, so which patches meet which weights is only known at run time. It is bound by weight traffic and by load balance.

This design follows the hybrid scheme of UbiMoE (Dong et al., FPGA accelerator for MoE-ViT) and gives each half its own hardware:

- a **fully streaming attention kernel** for MSA;
- a **reusable linear kernel** for every linear layer, including the data-dependent expert layers.

The two blocks run at the same time on **double-buffered activations**: MSA of step *t* overlaps MoE of step *t-1*. The time per step is the larger of the two block latencies.

```
             Q stream ─┐                    ┌─ host write (first input)
 K/V load ─► kv_buffer ─► attn_kernel ─► act_buffer ─► linear_kernel(dense) ─► Buf[sel]
                         (N_A attn_pe)     (attention        (projection)          │
                                            output)                       swap when both done
                                                                                   │
  Buf[~sel] ─► moe_block: gate linear ─► gating_unit ─► per expert: fc1+GELU ─► fc2 ─► out buffer
                           (linear_kernel + rr_router + N_L linear_cu, ping-pong weight_buffer)
```

Everything below is synthesizable SystemVerilog-2017. It has been checked with Verilator 5 and with the slang front end of Yosys.

## Number formats

| quantity | format | bits |
|---|---|---|
| activations, Q/K/V, scores, logits | signed Q16.16 | 32 |
| weights | signed Q4.12 | 16 |
| exp output | unsigned Q1.16 | 17 |
| accumulators | signed | 64 to 96 |

Weights are 16 bits and activations 32 bits, the W16A32 setting of the reference design. The position of the binary point is this design's choice. Results are saturated back to Q16.16 (`ubimoe_pkg::sat_act`).

## Streaming attention (`attn_kernel`, `attn_pe`)

Safe softmax needs the row maximum before any exponential can be formed. Done naively, that takes three passes over the scores. The kernel removes the extra passes in two steps.

**Patch reordering.** Each of the `N_A` PEs holds one query patch `Q_i` for the whole computation, in its Q register. Every key patch `K_j` is broadcast from `kv_buffer` to all PEs at once, one beat of `T_A` features per cycle. Because a PE always sees the same query, it can keep a running maximum per head (`max1[h]`) while it computes the dot products. Finding the maximum costs no extra pass.

**Two concurrent stages with a FIFO per head.** Each PE works on two query groups at once:

- *Stage 1* computes `x_ij = Q_i·K_j` per head. It uses `T_A` multipliers and `F/(H·T_A)` beats per head. It pushes `x_ij` into that head's score FIFO and updates the head's max register.
- When stage 1 has seen all `N` keys and stage 2 is idle, the maxima are handed over (`swap`).
- *Stage 2* then replays the scores from the FIFOs against the broadcast `V_j`:
  - per head, `e = exp(x_ij − m)` from a table-based `exp_unit`;
  - `l += e`;
  - `acc[d] += e·V_j[d]` for all `F` features, `T_A` per cycle.

  The numerator is used at once and never stored.
- At the end, one division per head gives `2^40 / l` (`recip_div`, 48 cycles). Each output is `acc·recip >> 40`.

While stage 2 finishes group *g*, stage 1 already runs group *g+1*. The FIFOs (depth `N+2`) carry the scores between the two stages.

The K/V beats of both stages are read from `kv_buffer` over separate ports.

**Timing.** One group takes about `N·F/T_A` cycles, and there are `ceil(N/N_A)` groups. The whole attention therefore takes about `N²F/(T_A·N_A)` cycles plus one stage-2 drain. This is the reference design's latency model. At the defaults (N=197, F=384, T_A=16, N_A=3) that is about 3.1·10^5 cycles. The unit testbench checks the measured count against the model.

**Departures:**

- Scores are not scaled by `1/sqrt(d_head)`. That factor is taken to be folded into Q upstream.
- The exp unit is a 256-entry `2^(-f/256)` table plus a shift. Its relative error is about 0.2 %.

## Reusable linear kernel (`linear_kernel`, `rr_router`, `linear_cu`)

Expert layers see a different, data-dependent set of patches for every expert. Fixed per-kernel patch assignment would leave hardware idle. Instead there is one kernel made of `N_L` compute units (CUs), each a `T_IN × T_OUT` multiply-accumulate grid:

- The **round-robin router** takes the next `N_L` unused entries of a patch list. It loads their input tiles into the CUs in turn, one CU per cycle.
- In **sparse mode** the list is an expert's patch-index list from the gating unit. In **dense mode** it is simply patches `0..n-1`. The same kernel serves the gate layer and the projection.
- Each `T_IN × T_OUT` weight tile is read once and broadcast to all CUs. Each weight tile is therefore fetched once per `N_L` patches, and only the router touches activations.

Loop order of one round (this design's choice):

```
for ti in input tiles:   load tile ti of each round patch into its CU   (N_L cycles)
  for to in output tiles: broadcast weight tile (ti,to); all CUs accumulate (1 cycle)
drain: for to, for each CU with a patch: emit output tile to          (1 tile/cycle)
```

A round takes about `in_tiles·(N_L+out_tiles+2) + out_tiles·N_L` cycles. If the list does not fill the last round, the empty CUs stay idle, and `partial_round` records that this happened. `act_fn = ACT_GELU` passes the outputs through `gelu_unit`, a 16-segment piecewise-linear GELU on [-4, 4]. This is the GELU between the two layers of an expert.

## MoE block (`moe_block`, `gating_unit`, `weight_buffer`)

The sequence for one image is:

1. **Gate layer.** A dense pass gives `E` logits per patch.
2. **Gating.** `gating_unit` picks the top `K` logits, with ties going to the lower index. It forms softmax weights over those `K` (exp, then one shared division) and appends `(patch, weight)` to each chosen expert's list.
3. **Experts, one at a time.** For every expert with a non-empty list:
   - fc1 (F→HID, sparse, GELU) writes into the hidden buffer;
   - fc2 (HID→F, sparse) follows;
   - each fc2 tile is scaled by the patch's gate weight and added into the output buffer (read-modify-write, with a per-tile "written" flag).

**Expert-level pipeline.** Expert weights stream in over `wl_*`: fc1 tiles first, then fc2, input tile major. They go into a ping-pong `weight_buffer`. While expert *e* computes from one bank, the loader already fills the other bank with the next expert that has patches. The banks swap between experts, so after the first expert the weight fetch is hidden behind the computation. `n_overlap_cycles` counts the cycles in which loading and computing overlap.

## Double buffering (`buf_swap_ctrl`, `ubimoe_top`)

The top holds two layer buffers. Buffer `sel` receives the MSA output, and the MoE block reads buffer `~sel`. A `start` pulse launches both blocks. `buf_swap_ctrl` waits until both have reported done, in either order or in the same cycle. It then toggles `sel` and pulses `layer_done`, so the next step's MoE block consumes what MSA has just written.

Before the first step, the host writes the first MoE input into the MoE-side buffer through `host_we`. The host reads the MoE output through `host_raddr/moe_rdata` and the MoE-side buffer through `host_buf_rdata`.

## What is left out or assumed

- **QKV generation, LayerNorm, residual adds, patch embedding and the classifier head are not built.** Q arrives as a valid/ready stream, and K/V are written into `kv_buffer`. The projection and gate weights are written through ports.
- **The layer buffers are on chip.** In the reference platform Buf0/Buf1 live in host-managed DDR, and expert weights live in HBM. Here the buffers are `act_buffer` arrays, and HBM is an external stream source.
- **All sizes are assumptions.** The reference evaluates an MoE-ViT whose backbone is ViT-S-like, and these defaults follow that model: 197 patches, F=384, 6 heads, 16 experts of hidden size 1536, top-4. The default tiling is `N_A=3` (three PEs are drawn in the reference figures), `T=16` and `N_L=4`, with `N_LP=2` CUs for the projection. The reference does not publish its tiling.
- The exp, reciprocal and GELU circuits, fixed-point formats, handshakes and loop orders are this design's own choices.
- Layer dimensions are set by parameters, not by run-time registers. A different model size (for example F=192 with 3 heads) needs a re-elaborated design.

## Lint and synthesis notes

Several signals are unused on purpose:

- the unused `sel` outputs of the single-bank weight buffer;
- the list-position outputs of the projection kernel;
- the per-head busy flags of the dividers (all heads start together, and the done flag of head 0 is used);
- the low bits of the GELU segment arithmetic.

Width-extension warnings come from the mixed 32/64/96-bit arithmetic and are intended.

## Simulating

Each block has a self-checking testbench in `tb/`. Each prints `TB_RESULT checks=<n> failures=<m>` and has a cycle-count watchdog. With Verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/ubimoe_pkg.sv tb/tb_attn_kernel.sv --top-module tb_attn_kernel
./obj_dir/Vtb_attn_kernel
```

**`tb_ubimoe_top`** runs the whole accelerator at a reduced size: 5 patches, F=4, 2 heads, 4 experts, top-2, 2×2 tiles. It runs two pipeline steps:

- The MSA result is compared with real-valued attention plus projection.
- Both MoE outputs are compared with a reference MoE layer computed in the testbench.
- The MoE input of step 2 is the MSA output of step 1.
- The test counts buffer swaps, attention stage overlap, expert-weight prefetch overlap, partial router rounds and the number of experts run. It fails if any of these never happens, or if a score FIFO overflows.

**`tb_ubimoe_full`** is the same test at the default parameters, with no parameter overrides. It covers 197 patches, F=384, 6 heads and 16 experts with HID=1536 and top-4.

- Each pipeline step takes about 1.21·10^6 cycles, and the MoE block sets that time. In the attention block the two stages overlap for about 6.3·10^5 cycles over the two steps.
- All 16 experts run, and the worst MoE error against the real-valued reference is about 0.02.
- Verilator needs about 6 minutes to build this test and about 3 minutes to run it.
