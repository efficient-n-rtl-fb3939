# An N:M sparse training accelerator in SystemVerilog

Training a network with N:M sparse weights keeps only N values out of every group of M
consecutive weights (here 2 out of 8), and which ones are kept changes every time the
weights are updated. An accelerator for this must do three things well:

1. multiply dense activations or gradients by compressed N:M weights, in the forward pass
   and in both matrix products of the backward pass;
2. update the FP32 master weights with momentum SGD;
3. choose the N largest weights of every group again after each update, and store them
   in compressed form for the next iteration.

This RTL builds all three as one datapath around a shared set of double-buffered
memories:

- a 32 x 32 **systolic array** of sparse processing elements that runs either
  weight-stationary (WS) or output-stationary (OS);
- 32 **weight-update lanes** in mixed precision;
- 32 **online reduction lanes** that sort each group of 8 new weights as they stream out of
  the update lanes.

The weights for the next forward pass are therefore ready in compressed form at the end
of the update, without a separate pruning pass.

The core idea of the processing element is *value-serial* sparsity. A PE receives a whole
group of M dense values from one side and N (value, index) pairs from the other. It then
spends one cycle per kept value: it picks the matching dense operand by index and
multiplies. A 2:8 group costs 2 cycles, where a dense PE would need 8. A dense group
takes the same path as a "2:2" group whose indexes are simply 0 and 1. So one PE design
serves sparse and dense layers, and at 2:8 the array does 4x the dense-equivalent work
per cycle.

## Block map

```
        host ports (task words, buffer fill, result read-back)
            |
     +------v------+   task word (cfg_q), start/kind/skew of each sequencer
     |  sat_ctrl   |--------------------------------------------------+
     +-------------+                                                  |
                                                                      v
  W2E buffer (R banks) --> sys_data_gen (west) --> +------------+   data_router
  N2S buffer (C banks) --> sys_data_gen (north) -> |   stce     | --> FP32->FP16, --+
                                                   | R x C uspe |     output row    |
                                                   +------------+                   |
  OPT buffer (C banks) --> sys_data_gen (lanes) --> wuve --(FP16 w')--> sore        |
                                                     |                    |         |
                                                     v                    v         v
                                                   out_sched  ------->  OUT buffer (C banks)
```

| Module | Role |
|---|---|
| `sat_top` | Wires everything together; its host ports stand in for the DDR/DMA side. |
| `sat_ctrl` | Runs a list of task words: starts the read sequencers and counts drain and pop cycles. |
| `sys_data_gen` | Per-lane read sequencer. Makes the address stream for one task and skews it lane by lane into a systolic wavefront. |
| `stce` | R x C array of `uspe`, with links for both dataflows. |
| `uspe` | The sparse PE: FP16 multiply, FP32 accumulate, 3-stage pipelines, three interleaved dot products. |
| `data_router` | Converts array results to FP16 and gives each one its output row. |
| `wuve` | C momentum-SGD lanes: FP32 v and w in, FP16 g in; new v, w and an FP16 copy of w out. |
| `sore` | C lanes of `topk_sorter` + `data_provider`: keeps the n largest of every 8 and emits them with their indexes. |
| `out_sched` | Merges router, update and reduction results into output-buffer writes. |
| `db_ram` | One bank with two halves (ping-pong), two write ports and one read port. |
| `sat_fp_pkg`, `sat_pkg` | Floating-point functions; task-word type and constants. |

## The processing element (`uspe`)

### Value-serial N:M

Each PE has:

- a register holding the current west group: M FP16 values;
- a small counter k that runs from 0 to n-1 within the group;
- a multiplexer that picks west value `idx_k`, where `idx_k` is the index that belongs
  to the k-th kept value.

The kept values and their indexes come from one of two places:

- **OS:** they arrive from the north, one pair per cycle.
- **WS:** they sit in the PE's stationary registers, loaded once per weight tile.

The product goes through a 3-stage FP16 multiplier. It is then widened to FP32 and added
in a 3-stage FP32 adder.

`n` (values per group) is a run-time setting. It can be anything from 1 to the synthesised
`N`. A 1:8 layer on the 2:8 hardware simply takes one cycle per group.

### Interleaving three dot products

A 3-stage adder cannot close an accumulation loop every cycle: the sum for cycle t is only
ready at t+3. The PE therefore always works on **three independent dot products
(slots)** in rotation. The feeder issues a group as:

```
(k=0, slot 0) (k=0, slot 1) (k=0, slot 2) (k=1, slot 0) (k=1, slot 1) (k=1, slot 2)  ... next group
```

Each running sum leaves the adder exactly when its slot's next product arrives. The adder
pipeline itself acts as the three-entry accumulator, so the PE does one useful MAC every
cycle. Which slots hold what:

- **OS:** the three slots are three output rows. The west buffer word for slot s is the
  group of activation row `r*I + s`.
- **WS:** the three slots are three consecutive input rows streamed through the same
  stationary weights.

The west stream repeats each group word once per k, so every slot sees its group n times.

Using the interleave in WS as well is a choice of this design. In WS, the partial sum
from the PE above has to meet the k=0 product at the adder input. The west generator
therefore skews rows by `(n-1)*3 + 3 + 1` cycles, which is 7 cycles at n = 2. This skew
comes from the pipeline depths. It is computed in `sat_ctrl` (`wgen_skew`).

### Getting results out

- **WS:** every bottom-row PE produces one FP32 result per streamed input row, one cycle
  after it leaves the adder (`s_pv`).
- **OS:** after the last group, each PE copies its three finished sums into a 3-deep
  output shift register. The controller then raises `os_pop` for `R*3` cycles. During a
  pop, every column shifts its registers down one PE per cycle, so the bottom row's
  results leave first, slot 0 first. `data_router` maps this pop order back to output row
  `(R-1-r)*3 + s`.

## Dataflows and buffer layouts

The buffers hold the operands in exactly the order the sequencers read them. The host
(or, in a full system, the offline scheduler and DMA) must lay data out as follows. Here
`G` is the number of M-groups along the reduction dimension, `n` the values kept per
group, `I = 3`, and `cnt` is the task word's count field.

**OS matmul** (`op=OP_MM, df=DF_OS, cnt=G`). Computes a `(R*3) x C` output tile.

- W2E bank r, address `g*3+s`: the dense M-group g of activation row `r*3+s`.
- N2S bank c, address `g*n+k`: `{index, value}` of the k-th kept weight of group g in
  output column c.
- Streaming takes `G*n*3` cycles.
- Results land in output bank c at `out_base + row`.
- For a dense layer, use n = 2 with indexes 0, 1, and place the dense pair in positions
  0 and 1 of the W2E word.

**WS matmul** (`df=DF_WS, cnt=B`). Computes a `(B*3) x C` output tile with
`K = R*M = 256` dense positions.

- N2S bank c, address `r*n+k`: the stationary weights of PE (r, c). They are preloaded
  bottom row first through the column chain.
- W2E bank r, address b: M-group r of input row b.
- Results land in output bank c at `out_base + b`.

**Weight update** (`op=OP_WU, cnt=L`). Processes L words per lane.

- OPT bank l, address j: `{FP16 g, FP32 v, FP32 w}`.
- Output bank l at `out_base + j` receives `{v', w'}`.
- With `sore_en`, bank l at `sore_base + group*n + k` receives
  `{32'b0, 16-bit index, FP16 value}`: the k-th largest value of every 8 consecutive
  words, largest first.

The read sequencer adds the skew: lane l is lane l-1 delayed by 1 cycle, or by the WS skew
for west rows in WS. This produces the usual systolic wavefront.

## Weight update and online reduction

Each `wuve` lane is a 5-stage pipeline with one result per cycle:

- `v' = mu*v + s*g`
- `w' = w + lr*v'`
- `h = half(w')`

`s` is a gradient scale and `lr` is signed (negative for descent). All three come from the
task word.

The FP16 weights stream straight into a `sore` lane. In the lane, a `topk_sorter` holds K
entries ordered by magnitude. For every new value, each entry compares it with its own
value. From its own flag and the flag of the entry above, it decides to:

- **freeze** (0,0);
- **take the new value** (0,1);
- **shift down** the value above (1,1).

Equal magnitudes keep the earlier value. After the 8th value, the sorted entries and
their positions are handed to a `data_provider`. It emits the first n of them, one per
cycle, while the sorter already accepts the next group. K = 2 here, so any n <= 2 works.

## Ping-pong buffers and task words

Every bank has two halves, selected by the address MSB. A task reads the half named in its
word (`in_half`) and writes the output half named in `out_half`. The host can therefore
fill one half while the engines use the other.

`sat_ctrl` holds up to 16 task words (`cfg_word_t` in `sat_pkg`). After `start` it
fetches them in order and runs each one through these phases:

1. **Preload** (WS only): the north sequencer runs the preload sequence.
2. **Stream**: the sequencers stream the operands.
3. **Drain**: a fixed count, derived from the pipeline depths, lets the last results
   leave.
4. **Pop** (OS only): `R*3` pop cycles.

An `OP_END` word raises `done`.

The controller has no completion handshake from the engines: drain lengths are computed,
not observed. The word's fields:

- op and dataflow;
- n, and `sore_n` / `sore_en`;
- cnt;
- the two halves;
- output and reduction base addresses;
- `s`, `mu`, `lr`.

## Numbers

- Operands are IEEE FP16 and accumulation is FP32.
- Every rounding is round-to-nearest-even.
- Subnormals are flushed to zero.
- The FP16 product is formed exactly in FP32 and then rounded to FP16 before it is widened
  again. This matches a PE built from an FP16 multiplier and a half-to-float switcher.
- Results written by the array are rounded to FP16 by the router. Weight-update results
  stay FP32.

## Where this RTL departs from, or adds to, the described design

- **Interleave in WS as well as OS**, with the west stream repeating each group per k
  (see above).
- **OS result drain** is a pop shift chain down each column (`R*3` cycles per tile),
  remapped by the router. The original does not say how OS results leave the array.
- **Buffer organisation**:
  - Each logical bank is one wide word per address: 8 FP16 values for W2E, value + index
    for N2S.
  - There is one bank per array row or column, and each half is 512 words deep.
  - The original's bank counts (128 W2E, 38 N2S, 64 optimizer) describe FPGA block-RAM
    use, not this organisation.
- **One reduction per update pass.** A group is 8 consecutive words of one lane, so
  the order in which the host stores the weights decides the grouping direction. BDWP
  needs two sparse copies of every weight, grouped along input channels for the
  forward pass and along output channels for the backward pass. Producing both takes
  two weight orders or a second pass over the new FP16 weights.
- **K = 2 sorter entries** (only 2:8 and 1:8 reductions). The original leaves K open.
- **Host ports replace DDR4, PCIe DMA and the host.** The offline configuration-word
  generator is software and is not built. A testbench plays the host.
- **Task word format, sequencer address patterns, controller states and drain counts**
  are this design's own.
- **Weight-update and reduction lanes are tied to the array width C** (32 in both cases in
  the original).

## Simulation and tests

Every module has a self-checking testbench in `tb/`. Each one ends by printing
`TB_RESULT checks=<n> failures=<n>`, and each has a watchdog. Example:

```
verilator --binary --timing --top-module tb_sat_top \
  rtl/sat_fp_pkg.sv rtl/sat_pkg.sv rtl/*.sv tb/tb_sat_top.sv
./obj_dir/Vtb_sat_top
```

`rtl/*.sv` lists the two packages again, which verilator accepts. Alternatively, list the
packages first and then the remaining files.

| Testbench | What it establishes |
|---|---|
| `tb_sat_fp_pkg` | Multiply, add, conversions and special values, against correctly rounded references. |
| `tb_uspe` | OS dense and 2:8, WS n=2 and n=1 with exact latency. |
| `tb_stce` | 3 x 3 array, OS dense and 2:8 matmuls, pop order. |
| `tb_sys_data_gen` | All sequences, skews and the `done` timing. |
| `tb_data_router` | Row mapping in both modes and FP16 conversion. |
| `tb_wuve` | Exact update results and the 5-cycle latency. |
| `tb_sore` | Top-2 and top-1 of random groups, ties, output cycle. |
| `tb_db_ram` | Random traffic against a model: port priority and halves. |
| `tb_out_sched` | Write-port merging and addressing. |
| `tb_sat_ctrl` | Task sequencing, preload and pop lengths, `done`. |
| `tb_sat_top` | End to end at 4 x 4: OS dense, WS 2:8 with preload, OS 2:8, update with 2:8 reduction. It counts each mechanism (pop, preload, interleaved slot, sparse index, dense, update, reduction, both buffer halves) and fails if one never occurs. |
| `tb_sat_top_full` | The same sequence on the full 32 x 32 design with default parameters, about 7000 checks. |

All data in the end-to-end tests is chosen so that every result is exact. Outputs are
compared bit for bit with products computed in the testbench.

## How far it can be trusted

- All testbenches pass, including the full-size one.
- Each testbench fails against a deliberately broken copy of its module.
- Timing closure at 200 MHz has not been attempted. The full 32 x 32 floating-point
  array, and the update lanes, were too large for a quick generic logic synthesis run, so
  there is no gate count for them. Both SystemVerilog front ends accept every file at full
  size. A single PE synthesises to about 1000 cells and 489 flip-flops.
- Floating-point behaviour outside normal numbers (subnormals) intentionally differs from
  IEEE.
- The design has no back-pressure anywhere. A task must fit its buffers
  (`cnt*3 <= 512` words per bank half), and the host has to split larger layers into
  tiles.
