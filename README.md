# SparseNN: a fully connected layer engine that skips zeros on both sides

A fully connected layer computes `y = ReLU(W a)`. Two kinds of work in it are wasted:

* **Zero inputs.** After a ReLU, many entries of `a` are zero. Every weight column that
  multiplies a zero contributes nothing.
* **Zero outputs.** Many entries of `y` come out negative and the ReLU turns them into zero.
  The whole row of `W` spent on such an output is wasted work.

Skipping zero inputs is easy: look at `a` and broadcast only its nonzero entries.
Skipping zero outputs requires knowing the sign of `W a` before computing it. This design
guesses that sign cheaply with a low-rank predictor trained alongside the network:

```
p = sign(U (V a))        U: m x r,  V: r x n,  r much smaller than m and n
y_i = ReLU((W a)_i)  if p_i = 1,   else 0
```

Computing `V a` costs `r x nnz(a)` multiply-accumulates (MACs), and `U (V a)` costs `r x m`.
After that, the full row `i` of `W` is used only when `p_i` says the output will be positive.

The hardware is a 64-PE (processing element) machine. Each PE holds a slice of every matrix
in its own SRAM, and the PEs share one 4-ary tree network. Each layer runs in three
phases, V, U and W, described below. The number of operations per layer is
`r*nnz(a) + r*m + nnz(a)*(rows predicted nonzero)`, against `nnz(a)*m` with the predictor
off. All of it is written as synthesizable SystemVerilog in `rtl/`, and every module has
a self-checking testbench in `tb/`.

## Where data lives: interleaving over 64 PEs

Everything is split over PEs by index modulo 64:

| item | lives in PE | at local slot |
|---|---|---|
| input activation `a_j` | `j mod 64` | `j / 64` (source register file) |
| output `y_m` and predictor bit `p_m` | `m mod 64` | `m / 64` (destination register file, predictor bank) |
| row `m` of `W` and of `U` | `m mod 64` | |
| column `j` of `V` | `j mod 64` | |

Each PE therefore has up to 64 inputs and 64 outputs, so one layer holds at most
64 x 64 = 4096 neurons. The global index of local slot `c` in PE `k` is `c*64 + k`, and the
12-bit index field of a network flit carries this number.

The memory word addresses inside one PE are given below. `n_rows` is the number of output
rows per PE, which is the same in every PE. `c` is the local slot of an input and `ml` is
the local output row `m/64`.

```
W MEM : w_base + j*n_rows + ml      (j = global input index)
V MEM : v_base + c*rank   + i       (i = 0..rank-1)
U MEM : u_base + i*n_rows + ml
```

Each layer has its own base addresses, so several layers can stay loaded at once. Each PE
has 64 K words of W (128 KB), 4 K words of U (8 KB) and 4 K words of V (8 KB).

## One layer, three phases

A layer begins when the host pulses `start` with a `layer_cfg_t` record. The record holds:
* `uv_en`
* `n_rows`
* `rank`
* the three base addresses

Each PE has two 64-entry activation register files that swap roles at every `start`. The
previous layer's outputs, or the input the host wrote, become the **source** file. The
other file becomes the **destination** file. The ReLU is applied when the source is read:
only values greater than zero count as nonzero inputs. The host can therefore read
outputs before the ReLU. A PE's `pe_controller` then runs the phases:

1. **V phase (column-based, only when `uv_en`=1).** The PE computes `V[i][c]*a_c` for
   i = 0..rank-1, for each of its local nonzero inputs, and accumulates into destination
   register `i`. This gives its share of `V a`. It then sends the `rank` partial sums up
   the tree as `FLIT_PSUM` flits. Each router adds the four partial sums from its children
   with the same row index, so the root emits the full `(V a)_i`. The root turns that stream
   around and broadcasts it to all 64 PEs.
2. **U phase (row-based).** Each received `(V a)_i` enters the PE's activation queue.
   A result may arrive while the PE is still in its own V phase; the `q_early` counter
   counts these. For each queue entry, the PE accumulates `U[ml][i]*(V a)_i` into every
   local output row. After `rank` entries, the predictor bank stores `p_ml = (result > 0)`.
   Rows at or beyond `n_rows` get `p = 0`.
3. **W phase (row-based with output skipping).** A leading-nonzero detector (LNZD) scans
   the source file. Each PE sends every local nonzero input up the tree as a `FLIT_ACT`
   flit carrying its global index, then an end marker, `FLIT_LAST`. The root broadcasts
   every activation it receives to all PEs, the sender included. For each activation taken
   from its queue, a second LNZD walks only the rows whose predictor bit is 1, issuing one
   MAC per row. Rows predicted zero cost no cycles and stay 0.

   Routers merge four end markers into one. When a PE sees the merged marker from the root,
   every activation of the layer has been seen. The PE drains its pipeline and raises `done`.

With `uv_en`=0 the V and U phases are skipped, every row is predicted nonzero, and the
machine only skips zero inputs. This is the mode for the output layer, or for a network
trained without a predictor.

Only one datapath is shared by the phases, and the phases are strictly sequential inside a
PE. Between phases the controller waits until the 5-stage pipeline is empty, and it clears
the destination file at the start of every phase.

## The H-tree network

`htree` has 16 leaf routers, 4 internal routers and 1 root router, each with four children:
64 = 4 x 4 x 4. Every link is one flit wide and carries one flit per cycle:

```
flit_t = { kind[1:0] (ACT, PSUM, LAST), idx[11:0], val[15:0] }
```

Every router (`noc_router`) has an up path and a down path.

**Up path.** Four input buffers, one per child, feed a 4-stage pipeline:
* **RC**: the arriving flit is registered and written into its child's buffer.
* **SA**: the heads of the four buffers are examined.
  * If any head is an activation, the one with the smallest index wins and the others wait.
  * Otherwise, if all four heads are partial sums, they are taken together.
  * Otherwise, if all four heads are end markers, they are merged into one.
* **ST/ACC**: the four partial sums are added (saturating).
* **LT**: the result is registered onto the parent link.

Since every PE sends its partial sums in the same row order, the four heads always carry
the same row. A flit crosses one router in 5 cycles when nothing waits.

**Down path.** One buffer holds flits from the parent. The head flit goes to all four
children in the same cycle, and only when every child has a credit for it.

**Flow control.** Every link is credit-based: a sender holds one credit per free buffer
entry at the receiver, and the receiver returns a credit when it pops an entry. Router
buffers are 8 flits deep, and the PE's activation queue is 16.

At the root, the up output is looped into the root's own down path. This loop is the
broadcast.

Back-pressure can run all the way round: a busy PE fills its activation queue, stops
returning credits, and the broadcast stops. This is why the controller keeps consuming
its queue while it is still sending.

## The PE pipeline

Each datapath operation carries the memory to read, the activation, the input index
(`in_idx`) and the destination row (`out_idx`). It passes through five stages:

| stage | module | work |
|---|---|---|
| 1 | `mem_addr_comp` | `addr = base + in_idx*stride + out_idx` |
| 2 | `mem_access` | synchronous read of W, U or V MEM (`sram_sp`) |
| 3 | `mac` | `prod = mem_word * act` (Q8.8, rounded down, saturated) |
| 4 | `mac` | `sum = dst[out_idx] + prod` (saturated) |
| 5 | `mac` | write `sum` back to the destination register |

Two back-to-back operations on the same row would read a stale register in stage 4.
For this case, stage 5's sum is forwarded into stage 4. This happens in the U phase with
`n_rows`=1, and in the W phase whenever one row is the only one predicted nonzero.

The `pe` module also holds:
* the activation queue (`act_queue`)
* both register files (`act_regfile`)
* the predictor bank (`predictor_bank`)
* the two LNZDs (`lnzd`)
* the network interface (`network_interface`), which keeps the credit count for the
  leaf buffer and returns a credit for every queue pop

## Numbers

Data are 16-bit two's-complement fixed point with 8 fractional bits (Q8.8), so 1.0 = 256.
* **Products** are shifted right arithmetically by 8, which rounds toward minus infinity,
  and then saturated.
* **Sums**, in the MAC and in the routers, saturate at +32767 and -32768.

No wider accumulator is used: every partial sum is a 16-bit word.

## Using it: `sparsenn_top`

Host-side ports:

* `wr_en, wr_pe, wr_target, wr_addr, wr_data` write one word per cycle:
  * `TGT_W`, `TGT_U` or `TGT_V`: a word of that memory in PE `wr_pe`.
  * `TGT_ACT`: destination register `wr_addr[5:0]` of PE `wr_pe`. This is how the first
    layer's input is loaded; the next `start` swaps it into the source file.
* `start` with `cfg` starts a layer. `done` is high when all 64 PEs are done.
* `rd_pe, rd_idx -> rd_data` reads a destination register combinationally, which gives the
  layer's output before ReLU. Rows predicted zero read 0.
* `layer_cycles` gives the cycles of the last layer. `perf` gives that layer's event counts:
  * MACs issued
  * activations broadcast
  * skipped rows
  * early V results
  * forwards
  * router arbitration holds
  * partial-sum additions
  * end-marker merges
  * credit stalls

To run a network:
1. Load all weights.
2. Write the input into the destination registers.
3. For each layer in turn, pulse `start` with that layer's configuration and wait for
   `done`. The outputs stay in place and become the next layer's inputs.

Do not write while a layer runs.

The default sizes hold, per PE, at most 64 K W words across all loaded layers. For
example, a 785-1000-1000-1000-10 network with a rank-15 predictor on the hidden layers
needs 45,560 W words, 720 U words and 675 V words in each PE.

## Simulating

Each testbench builds with plain Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/sparsenn_pkg.sv tb/tb_sparsenn_top.sv \
    --top-module tb_sparsenn_top -Mdir obj -o sim
obj/sim +verilator+rand+reset+2
```

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself with a watchdog if
the design hangs.

* `tb_sparsenn_top` runs the whole machine at its default sizes through three layers:
  * 256 -> 128 with the predictor on, rank 32
  * 128 -> 64 with the predictor off
  * 64 -> 64 with the predictor on, rank 16

  It checks every output against a model in the testbench, and the activation and MAC
  counts against the formula above. It also requires every mechanism counter to be
  nonzero.
* `tb_workload_mlp` runs a 785-1000-10 perceptron at full size. It uses a rank-15 predictor
  on the 1000-neuron hidden layer and random data with about 80% zero inputs. This is the
  shape of the digit-recognition networks the design was evaluated with. The test loads
  about 0.9 million words through the host port, checks all outputs, and prints the cycles
  per layer.
* `tb_pe` drives one PE through two layers against a modelled network.
* `tb_htree` sends activations, partial sums and end markers from all 64 ports.
* `tb_noc_router` checks:
  * the 5-cycle latency
  * smallest-index arbitration
  * credit stalls
  * partial-sum addition
  * end-marker merging
  * the broadcast
* The remaining testbenches cover one module each.

The top-level build takes a few minutes; the simulation itself runs in seconds.

## Departures from the published design, and choices it leaves open

* **Timing model.** The router's RC/SA/ST-ACC/LT stages, the 5-stage PE datapath and the
  memory sizes follow the published design. Buffer depths (16 in the PE queue, 8 in the
  routers) are this design's choice.
* **Number format.** The published design only says "16-bit fixed point". The Q8.8
  split, round-down products and saturation are this design's choice.
* **End of the W phase.** The end-marker flit is this design's mechanism for ending the
  W phase. The source leaves open how a PE learns that all activations have arrived.
* **ReLU.** The ReLU is applied when the source file is read, not when a result is written.
* **Clearing and draining.** Clearing the destination file and draining the pipeline
  between phases are this design's choice.
* **Partial-sum sending.** V-phase partial sums are sent only after all local inputs are
  done, row 0 first. The source suggests sending each row as soon as it is finished; in a
  column-based walk that only happens at the end anyway.
* **U phase.** The U phase does not skip zero entries of `V a`.
* **W phase.** The W phase issues at most one MAC per cycle per PE. A PE that has skipped
  all its rows still takes one cycle per received activation to dequeue it.
* **Host interface.** The host port, per-layer configuration record and event counters
  are this design's. The source does not describe how weights are loaded or layers are
  sequenced.
* **SRAM.** The SRAMs are plain arrays with a one-cycle read. A real chip would use
  memory macros in their place, with the same one-read-or-one-write-per-cycle behaviour.
* **Training.** The predictor's training (end-to-end, with a straight-through estimator for
  the sign) is outside the hardware. `U` and `V` are simply loaded like `W`.
