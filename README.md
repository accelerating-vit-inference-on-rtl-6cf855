# A block-sparse, token-dropping ViT encoder accelerator

This design runs Vision Transformer encoder layers while saving work in two ways:

- **Static block pruning of weights.** Every weight matrix is cut into b x b blocks (b = 16 by default). Whole blocks are removed offline, so each block column keeps only some of its blocks. The compute array skips the removed blocks entirely.
- **Dynamic token dropping.** At chosen layers, tokens that get little attention from the class token are dropped. The dropped tokens are merged into a single "fused" token, so later layers work on fewer rows.

The default sizing targets DeiT-Small: 197 tokens, 384 features, 6 heads and a 1536-wide MLP. It uses 16-bit fixed point, Q8.8, with a 40-bit accumulator.

## Datapath at a glance

```
             host / off-chip memory (not part of the RTL)
               | cb_* weight writes   | host_gfb_* / host_rb_*   | commands
               v                      v                          v
  +-------------------- vit_accel_top ----------------------------------+
  |  GFB (feature_buffer, P_T banks) ---> mpca ---> RB (feature_buffer) |
  |     ^   ^                             P_H x chm                 |   |
  |     |   |                             (P_T x P_C pe, ILBs, CB)   |   |
  |     |   +-------- em <--------------------------------------------+ |
  |     |            exp / rowscale / GELU / add / LayerNorm            |
  |     |             | row 0 scores                                   |
  |     +-------- tdhm (score sum, bitonic_sorter, shuffle, fusion)     |
  +---------------------------------------------------------------------+
```

One unit runs at a time, and each run is called a *pass*. The host issues one encoder layer as a sequence of passes. Here is the layer for one head group, with the buffer regions it reads and writes:

| step | pass | reads | writes |
|---|---|---|---|
| LN1 | em LNORM | GFB x | GFB |
| Q, K, V | mpca SBMM | GFB | RB |
| Q K^T per head | mpca DHBMM (K^T loaded as weights) | GFB | RB |
| softmax | em EXP (row 0 captured as token scores), mpca product with a ones column (row sums), em ROWSCALE | RB/GFB | GFB |
| A V per head | mpca DHBMM | GFB | RB |
| projection, residual | mpca SBMM, em ADD | | GFB |
| token dropping | tdhm | GFB | GFB |
| LN2, MLP1, GELU, MLP2, residual | em, mpca SBMM, em GELU, mpca SBMM, em ADD | | |

## Sparse weight format

A weight matrix W (M2 x D') is stored one b-wide block column at a time. Each block column has:

- a header with `len`, the number of retained blocks, followed by their row-block indices;
- the retained blocks themselves, each stored row by row in words of 8 values.

When the array computes block column c, the header turns "the e-th retained block" into "input block X[:, idx[e]]". The work for that column is therefore proportional to `len`. A column with no retained blocks takes one zero beat per output tile. Dense matrices use the same format, with every block listed. DBMM and DHBMM skip the header.

To load weights, the compute array raises `wload_req` together with a head group and a column group. The outside world then writes the headers and blocks of those columns through the `cb_*` ports and answers with `wload_done`. The off-chip side is not modelled in the RTL.

## The compute array (mpca, chm, pe)

`mpca` holds P_H = 4 CHMs. Each CHM is a P_T x P_C = 12 x 2 grid of PEs, and each PE has 8 x 8 multipliers. The loop nest is:

```
for i  head groups   (CHM j works on head i*P_H + j)
  for k  column groups  (PE column n works on block column k*P_C + n); load weights
    for l  row groups   (PE row m works on token block row l*P_T + m); load input buffers
      every PE computes its b x b output block; results drain to the RB
```

**Inside a PE.** A PE builds one 8 x 8 output tile as a sum of outer products. Each beat brings two slices:

- from the input local buffer, a column slice of 8 token rows at one input column;
- from the column buffer, a row slice of 8 weight columns at the same index.

A b x b output block is (b/8)^2 tiles. A tile takes b beats per retained block, so a block column with `len` blocks takes (b/8)^2 * b * len cycles. At the last beat the PE shifts its 64 sums right by 8 and saturates them to 16 bits. The results go into an output register, which is drained one row per cycle.

**Column controllers.** Every PE column has its own controller, because each weight column has its own header. The PEs of one column share the weight slice. The PEs of one row share their input buffer, which has one read port per PE column.

**Stalls.** A tile's closing beat is held while any PE of that column still holds an undrained tile. This includes a closing beat that is still in the pipeline. Result-buffer bank m takes one word per cycle from PE row m of all CHMs, with fixed priority. A column with only one or two retained blocks finishes tiles faster than they can drain, so it stalls.

**Cycle counters.** `mm_cyc_load`, `mm_cyc_comp` and `mm_cyc_stall` count the cycles of each phase:

- Loading the input buffers takes b * (input words) cycles per row group. In DHBMM this is multiplied by P_H, because every CHM loads its own head slice.
- Loading and computing are not overlapped.

**Modes.**

- *SBMM*: sparse; each column follows its header.
- *DBMM*: dense.
- *DHBMM*: dense, and CHM j reads its input from a column offset `x_head_stride * head`. This is what Q_h K_h^T and A_h V_h need.

## Buffers

**Feature buffers.** The GFB and the RB are the same `feature_buffer`. Each has P_T banks of one 8-value word per address. Token row r lives in bank (r/b) mod P_T. As a result, a row group loads all P_T input buffers in parallel, and each RB bank serves one PE row. Single-row users (the EM, the token dropper and the host) address a buffer by (row, word); the top picks the bank and routes the read data back one cycle later.

**Input local buffer.** It has 8 lanes. Lane r holds token rows r, r+8, …, which lets a column slice be read in one cycle.

**Column buffer.** It has one bank per CHM and one sub-bank per PE column. Each sub-bank holds up to GAMMA = 96 blocks, the longest column of a 1536-row MLP2 weight.

## Element-wise module (em)

The EM streams rows one word per cycle, from the RB or GFB into the GFB. Columns at or beyond `valid_cols` are written as zero, which keeps the padding clean.

| op | what it computes |
|---|---|
| EXP | exp(x / 2^shift). Uses 2^x with a 17-entry table and linear interpolation. Error is about 1 %. |
| ROWSCALE | Divides every value by a per-row factor taken from the RB (the softmax row sum), scaled by 2^shift. One reciprocal per row, from a serial divider. |
| GELU | x * sigmoid(1.703 x), with a piecewise-linear sigmoid. Error is under about 0.03 + 3 % of x. |
| ADD | Residual add, saturated. |
| LNORM | (x - mean) / std, in two passes over the row, with a serial square root and divider. There is no gamma/beta; fold them into the next weights. |
| COPY | Plain copy. |

With `capture` set, the EXP results of row 0 are also sent to the token dropper. In attention, row 0 is the class-token row.

## Token dropping (tdhm, bitonic_sorter)

Over the heads, the token dropper adds up the captured class-token rows and scales the sum by 1/H. This gives the score of every token. A pass then runs these steps:

1. It copies the token matrix from the GFB into an old-token buffer.
2. It sorts tokens 1 … n-1 by score, highest first, with ties going to the lower index. The bitonic network does one stage per clock, so 256 entries take 36 cycles.
3. It keeps the best K = ceil((n-1) * r_t) tokens, in score order, after the class token.
4. It fuses all the others into one token, Σ score_j * x_j.
5. It writes the new matrix back: n_out = K + 2 rows, or K + 1 if nothing was dropped.

r_t is given in Q0.8 and 1/H in Q0.16. The shuffle moves one word per cycle.

## Interface of the top

- `mm_start` / `em_start` / `td_start` start a pass, described by the command structs `mm_cmd_t`, `em_cmd_t` and `td_cmd_t` (see `vit_pkg`).
- `busy` covers all three units. Only one may run at a time, and assertions check this.
- `sc_clear` clears the token scores at the start of a layer.
- `wload_*` and `cb_*` carry weight loading.
- `host_gfb_*` and `host_rb_*` give the host access to the buffers while the accelerator is idle. Read data arrives one cycle after the request.
- `td_n_out`, `td_n_keep` and `td_n_fused` report the result of the last token-dropping pass.

## Where this design departs from the paper it implements

- **Number format.** Q8.8 is this design's own choice. The paper gives only 16-bit integers.
- **No overlap of input loading and compute.** Input-buffer loading is not overlapped with compute, and weight loading is not overlapped either. Measured cycle counts are therefore higher than a double-buffered design would give; in the tests, compute is about 10 % above the ideal block model.
- **Serial shuffle.** The index shuffle moves one entry per cycle instead of several.
- **Softmax split into passes.** Softmax is split into EXP, a row-sum product and ROWSCALE passes. The function approximations are this design's own.
- **No dedicated controller.** The layer schedule lives in the host. There is no on-chip instruction sequencer.
- **Block size 32.** The paper also evaluates b = 32. Set `B = 32` for that; the buffers then need only half the `GAMMA`. A b = 32 pruned model also runs unchanged on the b = 16 build if each 32 x 32 block is written as four 16 x 16 blocks.

## Verification

Each unit has a self-checking testbench in `tb/`. Each prints `TB_RESULT checks=N failures=M` and has a watchdog.

| bench | what it covers |
|---|---|
| `tb_pe` | random tiles against a sum-of-products reference, plus output timing |
| `tb_input_local_buffer`, `tb_column_buffer_bank`, `tb_feature_buffer` | random write/read traffic against reference arrays |
| `tb_bitonic_sorter` | random arrays with many ties; exact order and the 36-cycle latency |
| `tb_em` | every operation against real-valued references (exp, GELU, division, LayerNorm) within tolerance; ADD and COPY exact |
| `tb_mpca` | reduced array (2 CHMs of 2 x 2 PEs). SBMM with pruned blocks, a zero column and stalls, then DBMM and DHBMM, all checked exactly; also weight requests, load cycles and the compute-cycle lower bound |
| `tb_tdhm` | r_t = 0.7, 0.5 and 1.0: kept order, fused token, counts and pass length |
| `tb_vit_accel_top` | the whole chain at reduced size: LNORM, SBMM, GELU, ADD, DHBMM, DBMM, EXP with capture, token dropping. Each mechanism is counted, and a mechanism that never happens counts as a failure |
| `tb_vit_accel_top_full` | the same chain on the top with every parameter at its default. It takes a few minutes to build and under a second to run |

To run one with Verilator:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv rtl/vit_pkg.sv tb/tb_mpca.sv --top-module tb_mpca
./obj_dir/Vtb_mpca
```

### Limits of the checks

- The references in the testbenches use the same Q8.8 rounding rule as the hardware: shift right by 8, then saturate. The products themselves are checked exactly. The EM approximations are checked only against tolerances.
- A full DeiT-Small layer has not been simulated end to end. The full-size testbench uses the default hardware with a small workload of 40 tokens and 32 features.
