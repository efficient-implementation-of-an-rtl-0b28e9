# Adaptive Transformer accelerator for massive-MIMO outdoor localization

This is a SystemVerilog model of an accelerator that estimates a user position (x, y) from one 5G massive-MIMO channel snapshot. The snapshot is a 128 x 46 beam-delay amplitude matrix. The accelerator:

- classifies the propagation scenario (S1, S2 or S3) with a small router;
- skips input rows that are almost all zero;
- runs the scenario's own Transformer model, which has one encoder layer for S1 and two for S2 and S3;
- finishes with max-pooling and a two-layer fully connected network (FCNN).

All arithmetic is 16-bit Q8.8 fixed point, with 40-bit accumulators.

## Structure (`rtl/`)

| File | Role |
|---|---|
| `loc_pkg.sv` | Sizes, number format, helper functions, weight-memory layout |
| `loc_accel_top.sv` | Top level: X buffer, port muxing, all units below |
| `control_unit.sv` | FSM: load → route → sparsity → encoder layer(s) → FCNN → output; selects weight segments and measures latency |
| `slp_router.sv` | Single-layer perceptron: 128 inputs (one delay bin per beam) → 3 logits on a 3-PE output-stationary array, argmax label |
| `mode_select.sv` | Majority vote over the last 5 router labels |
| `sparsity_unit.sv` | Per row, counts elements below Te and masks the row when the count is above Tr |
| `memory_bank.sv` | Weight memories: 5 encoder segments (S1, S21, S22, S31, S32), 3 FCNN sets, the router weights, and a host write port |
| `encoder_layer.sv` | One folded encoder layer: `mha_unit`, an X1 buffer, then `ffn_unit` |
| `mha_unit.sv` | Two-head attention with sigmoid-with-bias activation, Wo projection and residual; does the row skipping |
| `ffn_unit.sv` | 46 → 64 (ReLU) → 46 network with residual, on input-stationary engines |
| `fcnn_unit.sv` | Max-pool (4 features to 1, 2 zero pads) → 1536 → 32 (leaky ReLU 0.3) → 2 |
| `ve_is.sv` | Input-stationary vector engine: multipliers and an adder tree (46, 23 and 64 lanes) |
| `ve_os.sv` | Output-stationary vector engine: accumulating PEs (3, 23 and 32 lanes) |
| `sigmoid_lut.sv` | 1025-entry sigmoid table over [-16, 16], step 1/32 |
| `row_buffer.sv` | Row-wide activation buffer |
| `maxpool_row.sv` | Pools one token row, 46 features to 12 |

### Top-level use

1. Load all weights through `cfg_we/cfg_sel/cfg_addr/cfg_data`. `memory_bank.sv` and `loc_pkg.sv` give the layout.
2. Set the per-scenario thresholds on `te_cfg` and `tr_cfg`.
3. Stream the 128 rows on `in_row`. A row is taken in each cycle where both `in_valid` and `in_ready` are high.
4. The result arrives with `out_valid`. It carries:
   - `out_pos`: the position (x, y);
   - `out_label`: the raw router label;
   - `out_scen`: the model that was used;
   - `out_skipped`: the number of masked rows;
   - `out_attn_rows`: the number of rows attended in layer 0;
   - `out_cycles`: the latency in cycles, counted from the first row.

## Where the time goes: the attention schedule

About four fifths of the run time is the attention block. Its schedule decides both the latency and the benefit of row skipping.

**Pass 1, projections (input-stationary).**
- Each kept token row X_i is loaded once into a 46-lane engine.
- The 138 stored-transposed columns of Wq, Wk and Wv stream past it, one dot product per cycle.
- The resulting Q_i, K_i and V_i go into three row buffers.

**Pass 2, attention, row by row and head by head.** A head is 23 features wide.
- **Scores.** Q_i,h is held in a 23-lane engine while K_j,h streams by for all 128 j.
  - Each dot product is requantised, multiplied by γ/√d_k and offset by the bias b = -log 128.
  - The result goes through the sigmoid table.
  - No softmax-style row reduction is needed, so the weights stream straight into a 128-entry buffer.
- **Weighted sum.** The weights and V_j,h then stream into 23 accumulating PEs, one per output feature.
- **Output.** Both heads' outputs, 46 values, are projected by Wo. X_i is added and the row is written to X1.

**Cost per row.**
- An attended row costs about 715 cycles: 142 for the projection and about 573 for the attention.
- A skipped row costs about 52 cycles, for its Wo pass.
- The FFN adds about 119 cycles per row.
- The FCNN takes 2,088 cycles per snapshot.

The FCNN time is dominated by 1536 pooled inputs, each broadcast to 32 accumulating PEs.

**Row skipping.** The mask is computed once from the input snapshot. It applies to the first encoder layer only, because later layers see dense activations. This is why the two-layer scenarios gain much less from sparsity than S1.

## Weight memory

- **Encoder segments.** Each of the five segments holds 297 words of up to 64 lanes:
  - Wq, Wk, Wv and Wo, with one column per word;
  - W1 and W2 of the FFN;
  - b1 and b2;
  - one word carrying the score scale (lane 0) and the sigmoid bias (lane 1).
- **FCNN sets.** Each of the three sets holds 1570 words of 32 lanes.
- **Router.** 129 words of 3 lanes.

The control unit selects the segment from the scenario and the layer number. `loc_pkg.sv` lists every offset.

## Simulating

There are no data files or external models. To build and run a testbench with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb rtl/loc_pkg.sv tb/tb_ref_pkg.sv \
    tb/tb_loc_accel_top.sv --top-module tb_loc_accel_top
./obj_dir/Vtb_loc_accel_top
```

The full-size end-to-end test builds in seconds and runs in a few seconds. It uses the top level with all parameters at their defaults. Replace the testbench name to run any other test.

## Performance at 100 MHz (full-size simulation)

| Case | Cycles | Time | Published figure |
|---|---|---|---|
| S1, dense | 109,755 | 1.10 ms | 1.06 ms |
| S2/S3, dense | 217,156 | 2.17 ms | 2.11 ms |
| S1, 83 of 128 rows skipped | 54,394 | 0.54 ms (2.02x faster) | 0.51 ms (2.08x) |

## Design decisions not fixed by the source description

- **Row skipping.** A masked row is neither projected to Q/K/V nor attended. Its K and V entries read as zero, and its attention output is zero. The Wo projection, the residual and the FFN still run on every row. Skipping applies only to the first encoder layer. With these rules the S1 speedup comes out close to the published one.
- **FCNN hidden width.** It is 32, matching the 32-PE engine.
- **Max-pooling.** The factor is k = 4, with 2 zero pads, giving 1536 FCNN inputs.
- **Leaky ReLU slope.** 0.3 is approximated as 77/256.
- **Sigmoid table.** Entries are 9 bits wide (0..256), not 16.
- **Attention score.** The score is `sat16((requant(q·k) * scale) >> 8 + bias)`. `scale` = γ/√d_k and `bias` = -log 128 are stored in each segment.
- **Layer normalisation.** There is none; only residual additions are used.
- **Router input.** The router reads delay bin 0. Ties in the router and in the vote go to the lower class index.
- **S3 thresholds.** S3 uses the hardware thresholds Te = 0.006 (Q8.8 value 2) and Tr = 28. S1 uses 0.039/41 and S2 uses 0.014/1.
- **Not modelled.** Channel preprocessing (Hann window, IFFT, amplitude) and the processor-side host interface are outside the accelerator.

## Testbenches (`tb/`)

Each block has a self-checking testbench `tb_<module>.sv`. Each one prints `TB_RESULT checks=N failures=M` and has a watchdog.

- The datapath units are compared bit-exactly against the reference model in `tb_ref_pkg.sv`. This covers attention, FFN, encoder layer and FCNN at full size. The same testbenches also check the cycle counts.
- `tb_loc_accel_top.sv` runs nine snapshots through the unmodified top level. It checks:
  - the position;
  - the scenario after the vote;
  - the skipped-row counts;
  - one- and two-layer models;
  - the latency against the published 1.06 ms and 2.11 ms (±5%);
  - the S1 sparse speedup (1.8x to 2.3x).
