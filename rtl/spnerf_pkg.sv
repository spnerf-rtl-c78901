// spnerf_pkg: types and constants shared by the SpNeRF accelerator.
//
// Numbers follow the paper where it gives them: FP16 on-chip arithmetic,
// an 18-bit unified index space whose first 4096 entries address the color
// codebook (4096 x 12), the Instant-NGP hash primes, hash tables of 32 k
// entries, 64 subgrids, an MLP of 39 -> 128 -> 128 -> 3 processed in batches
// of 64 and an input buffer of 16 banks holding blocks of 4 elements.
// Grid extent (160^3) and the true-grid buffer depth are this design's own
// choices; everything marked "assumed" below is not given by the paper.
package spnerf_pkg;

  typedef logic [15:0] fp16_t;   // IEEE 754 binary16

  localparam fp16_t FP16_ZERO = 16'h0000;
  localparam fp16_t FP16_ONE  = 16'h3C00;

  // ---- voxel grid / hash mapping -------------------------------------
  localparam int unsigned COORD_W    = 8;        // vertex coordinate bits (assumed, grid <= 256)
  localparam int unsigned GRID_DIM   = 160;      // grid extent per axis (assumed, VQRF default)
  localparam int unsigned N_SUBGRID  = 64;       // K, paper Sec. V-B
  localparam int unsigned SUBGRID_W  = 3;        // w = ceil(GRID_DIM / K) (derived)
  localparam int unsigned HASH_T     = 32768;    // T, paper Sec. V-B ("32 k")
  localparam int unsigned HASH_W     = 15;       // log2(T)
  localparam logic [31:0] HASH_PI1   = 32'd1;
  localparam logic [31:0] HASH_PI2   = 32'd2654435761;
  localparam logic [31:0] HASH_PI3   = 32'd805459861;
  localparam int unsigned IDX_W      = 18;       // unified index, paper Sec. III-B
  localparam int unsigned CB_ENTRIES = 4096;     // codebook 4096 x 12, paper Sec. IV-B
  localparam int unsigned N_FEAT     = 12;       // color feature length
  localparam int unsigned TG_DEPTH   = 8192;     // true-grid entries per bank (assumed)

  // ---- MLP -------------------------------------------------------------
  localparam int unsigned N_VIEW     = 27;       // view-direction encoding length (39 - 12)
  localparam int unsigned IN_LEN     = 39;       // MLP input vector length, Fig. 6 / Sec. IV-C
  localparam int unsigned HID        = 128;      // hidden channels
  localparam int unsigned N_OUT      = 3;        // RGB
  localparam int unsigned BATCH      = 64;       // batch size
  localparam int unsigned BLK        = 4;        // elements per block, Fig. 6
  localparam int unsigned N_BANK     = 16;       // input-buffer banks, Fig. 6 (Bank 0 .. Bank 15)

  typedef struct packed {
    logic [COORD_W-1:0] x;
    logic [COORD_W-1:0] y;
    logic [COORD_W-1:0] z;
  } vcoord_t;                                    // integer voxel-grid vertex

  typedef struct packed {
    fp16_t x;
    fp16_t y;
    fp16_t z;
  } fpos_t;                                      // sample position in grid units

  typedef struct packed {
    logic [IDX_W-1:0] index;                     // unified non-zero value index
    fp16_t            density;
  } hentry_t;                                    // one hash-table entry

  // MLP layer geometry: layer l (0..2) has K inputs (layer 0: 39 padded to
  // 40) and N outputs; with C array columns it runs in ceil(N / C) tiles,
  // and its weights start at row layer_base in the weight buffer, stored
  // tile by tile, one row per input element k (row = base + tile*K + k).
  function automatic int unsigned layer_k(int unsigned l);
    return (l == 0) ? IN_LEN + 1 : HID;
  endfunction
  function automatic int unsigned layer_n(int unsigned l);
    return (l == 2) ? N_OUT : HID;
  endfunction
  function automatic int unsigned layer_tiles(int unsigned l, int unsigned c);
    return (layer_n(l) + c - 1) / c;
  endfunction
  function automatic int unsigned layer_base(int unsigned l, int unsigned c);
    int unsigned b = 0;
    for (int unsigned m = 0; m < l; m++) b += layer_tiles(m, c) * layer_k(m);
    return b;
  endfunction

  // sideband that travels with one voxel-grid vertex through the SGPU
  typedef struct packed {
    fp16_t      weight;                          // trilinear weight of this vertex
    logic [5:0] tag;                             // point slot in the batch (0..63)
    logic       last;                            // 8th vertex of the point
  } vside_t;

  // exact conversion of an unsigned integer (< 2048) to FP16
  function automatic fp16_t u2fp16(logic [10:0] n);
    fp16_t h;
    h = FP16_ZERO;
    for (int p = 0; p < 11; p++)
      if (n[p]) h = {1'b0, 5'(p + 15), 10'((n << (10 - p)) & 11'h3FF)};
    return h;
  endfunction

  // exact conversion of a signed 8-bit integer to FP16
  function automatic fp16_t s8_to_fp16(logic signed [7:0] v);
    fp16_t h;
    logic [10:0] mag;
    mag = v[7] ? 11'(-$signed({v[7], v})) : {3'b0, v};
    h = u2fp16(mag);
    if (v[7]) h[15] = 1'b1;
    return h;
  endfunction

endpackage
