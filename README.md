# SpNeRF accelerator in SystemVerilog

This is a synthesizable SystemVerilog model of the SpNeRF accelerator for sparse volumetric neural rendering. It has two parts:

- The **Sparse Grid Processing Unit (SGPU)** decodes the hash-mapped sparse voxel grid on line. It handles hash lookup, bitmap masking, codebook and INT8 true-grid decoding, and trilinear interpolation.
- The **MLP unit** is an output-stationary FP16 systolic array that runs the 40 → 128 → 128 → 3 network on batches of 64 points.

All arithmetic is IEEE binary16 with one shared convention:

- round to nearest even
- subnormals flushed to zero
- zero results are +0

## Data flow (`spnerf_top`)

1. **Position buffer** (`position_buffer`). Points are written as FP16 positions plus a 27-element view vector, 64 per bank. There are two banks with commit/release ping-pong.
2. **Grid ID unit** (`grid_id_unit`). It takes floor and floor+1 on each axis. It computes the trilinear weights as (wx·wy)·wz with FP16 subtractors and multipliers. It streams the 8 vertices, one per cycle.
3. **Subgrid selection** (inside `sgpu`).
   - Vertex x belongs to subgrid k = x / w and is looked up in bank k mod 2.
   - Per bank, the registers `sg_valid`, `sg_id` and `sg_tg_base` say which subgrid that bank holds.
   - A vertex whose subgrid is not loaded is a miss. It decodes as zero and is counted.
4. **Bitmap lookup unit** (`bitmap_lookup_unit`). It holds one bit per voxel of the loaded subgrid, at position ((x − k·w)·GY + y)·GZ + z.
5. **Hash mapping unit** (`hash_mapping_unit`, `hash_index_unit`, `index_density_buffer`, `color_codebook`, `true_grid_buffer`).
   - The hash is h = (x ⊕ 2654435761·y ⊕ 805459861·z) mod 32768. The entry it selects holds an 18-bit unified index and an FP16 density.
   - An index below 4096 reads the 4096 × 12 FP16 codebook.
   - Any other index reads the INT8 true grid at index − 4096 − tg_base.
   - A vertex whose bitmap bit is 0 gives zero feature and zero density.
6. **Trilinear interpolation unit** (`trilinear_interp_unit`). It de-quantises true-grid values with one FP16 scale. It weights all 12 features and the density, then sums the 8 vertices.
7. **Concatenation.** The 12 features, the 27 view values and a zero pad form a 40-element vector. It is written to the MLP input buffer. The density leaves on `dens_*`.
8. **MLP input buffer** (`mlp_input_buffer`). It uses the block-circulant format:
   - 16 banks × 4 lanes.
   - Element e of vector v is stored in bank (v/4 + e/4) mod 16, lane v mod 4, row e.
   - A vector takes 4 cycles to write.
   - One read returns element r of all 64 vectors, after the shift logic undoes the rotation by r/4 banks.
   - The two halves work as a ping-pong.
9. **MLP** (`mlp_unit`: `systolic_array` of `sa_pe`, `weight_buffer`, `output_buffer`, `activation_unit`, `mlp_controller`).
   - Layer by layer and tile by tile (C output channels per pass), the controller clears, feeds K rows, flushes R+C−1 cycles and drains one column per cycle into the output buffer.
   - The activation unit applies ReLU to the hidden layers and writes them back into the input buffer.
   - The last layer's three outputs leave on `res_*`.
   - A batch takes 1 + Σ(tiles·(K+R+C) + 2N + 2) cycles. That is 1629 cycles with the 64 × 64 array.

DRAM and the memory controller are not modelled, because the paper gives no interface for them. Every on-chip memory has a fill port that is brought out at the top instead.

## Numbers taken from the paper and choices of this design

| Item | Value | Origin |
|---|---|---|
| Hash table size | 32768 entries per bank | paper (32 k) |
| Subgrids | 64, split along x | paper |
| Unified index | 18 bit, codebook below 4096 | paper |
| Codebook | 4096 × 12 FP16 | paper |
| True grid | INT8 × 12 | paper |
| MLP | 128, 128, 3 channels; batch 64 | paper |
| Input buffer | 16 banks, blocks of 4, 39 values + 1 pad | paper (Fig. 6) |
| Double buffering | every buffer | paper |
| Grid size / subgrid width | 160³, w = 3 | design choice |
| True-grid rows per bank | 8192 | design choice |
| Array columns | 64 (rows = batch 64) | design choice |
| MLP input width | 40 (12 features + 27 view + pad) | design choice |
| Bias | none | design choice |
| Activation | ReLU on hidden layers, identity on the output | design choice |
| Vertex streaming | one vertex per cycle | design choice |
| Density | interpolated like the features | design choice |
| FP16 details | flush-to-zero subnormals | design choice |

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints `TB_RESULT checks=… failures=…`.

- The FP16 units are compared with a double-precision reference (`tb/fp16_ref_pkg.sv`).
- Memories are compared with models.
- Timing is checked where a rate exists:
  - 8 cycles per point in the GID
  - 4 cycles per input-buffer vector write
  - K+R+C−2 cycles to array results
  - the controller's cycles per batch

There are two end-to-end tests:

- `tb_spnerf_top` uses a reduced geometry.
- `tb_spnerf_top_full` uses the default, full-size parameters.

Both share `tb/spnerf_top_tb_body.svh`. They:

- fill every memory;
- run four batches (the last one partial), with a subgrid-bank reload and a weight-half switch in between;
- compare every density and every MLP output bit for bit with a reference model of the whole algorithm;
- compare the miss, mask, codebook and true-grid counters with the model;
- fail if any of these mechanisms never occurs: miss, mask, codebook, true grid, position-buffer stall, input-buffer stall, reload, weight switch, partial batch.

## Limits

- The DRAM and the memory controller are replaced by fill ports.
- The subgrid registers must only be changed while the SGPU has no vertex of that bank in flight.
- The paper gives no microarchitecture for the controller, the activation unit or the exact GID pipeline. Their schedules here are this design's own.
