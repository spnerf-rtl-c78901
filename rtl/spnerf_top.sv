// spnerf_top: the SpNeRF accelerator core: the Sparse Grid Processing Unit
// (online decoding of the hash-mapped sparse voxel grid and trilinear
// interpolation) feeding the MLP Unit (3-layer MLP on an output-stationary
// systolic array) through the block-circulant input buffer.
//
// The memory controller and the DRAM behind it are not part of this RTL;
// every on-chip buffer's fill port is a port of this module instead:
// position buffer (pb_*), subgrid bank descriptors (sg_*), hash tables
// (ht_*), codebook (cb_*), true grid (tg_*), bitmaps (bm_*) and MLP weights
// (wb_*, w_half). Per batch of up to 64 points the core returns the
// interpolated density of each point (dens_*, as each point completes) and
// three result rows R, G, B for all 64 points (res_*).
module spnerf_top
  import spnerf_pkg::*;
#(
  parameter int unsigned SA_COLS = 64,
  parameter int unsigned HT      = HASH_T,
  parameter int unsigned CBD     = CB_ENTRIES,
  parameter int unsigned TGD     = TG_DEPTH,
  parameter int unsigned SGW     = SUBGRID_W,
  parameter int unsigned GY      = GRID_DIM,
  parameter int unsigned GZ      = GRID_DIM,
  localparam int unsigned HW  = $clog2(HT),
  localparam int unsigned CBW = $clog2(CBD),
  localparam int unsigned TGW = $clog2(TGD),
  localparam int unsigned BMD = (SGW * GY * GZ + 31) / 32,
  localparam int unsigned BMW = $clog2(BMD),
  localparam int unsigned WAW = $clog2(layer_base(3, SA_COLS))
) (
  input  logic             clk,
  input  logic             rst_n,
  input  fp16_t            scale,
  // position buffer
  output logic             pb_wr_ready,
  input  logic             pb_wr_en,
  input  logic [5:0]       pb_wr_addr,
  input  fpos_t            pb_wr_pos,
  input  fp16_t            pb_wr_view [N_VIEW],
  input  logic             pb_commit,
  input  logic [6:0]       pb_commit_count,
  // subgrid descriptors and SGPU buffers
  input  logic             sg_we,
  input  logic             sg_bank,
  input  logic             sg_valid,
  input  logic [5:0]       sg_id,
  input  logic [IDX_W-1:0] sg_tg_base,
  input  logic             ht_we,
  input  logic             ht_bank,
  input  logic [HW-1:0]    ht_addr,
  input  hentry_t          ht_data,
  input  logic             cb_we,
  input  logic [CBW-1:0]   cb_addr,
  input  fp16_t            cb_data [N_FEAT],
  input  logic             tg_we,
  input  logic             tg_bank,
  input  logic [TGW-1:0]   tg_addr,
  input  logic [7:0]       tg_data [N_FEAT],
  input  logic             bm_we,
  input  logic             bm_bank,
  input  logic [BMW-1:0]   bm_addr,
  input  logic [31:0]      bm_data,
  // MLP weights
  input  logic             wb_we,
  input  logic             wb_half,
  input  logic [WAW-1:0]   wb_addr,
  input  fp16_t            wb_data [SA_COLS],
  input  logic             w_half,
  // results
  output logic             dens_valid,
  output logic [5:0]       dens_tag,
  output fp16_t            dens_data,
  output logic             res_valid,
  output logic [1:0]       res_ch,
  output fp16_t            res_data [BATCH],
  output logic [6:0]       res_count,
  output logic             mlp_busy,
  // status counters
  output logic [31:0]      cnt_points,
  output logic [31:0]      cnt_miss,
  output logic [31:0]      cnt_masked,
  output logic [31:0]      cnt_from_cb,
  output logic [31:0]      cnt_from_tg,
  output logic [31:0]      cnt_batches
);
  localparam int unsigned VLEN = IN_LEN + 1;
  logic       fill_ready, vec_valid, fill_commit;
  logic [5:0] vec_idx;
  logic [6:0] fill_count;
  fp16_t      vec_data [VLEN];

  sgpu #(.HT(HT), .CBD(CBD), .TGD(TGD), .SGW(SGW), .GY(GY), .GZ(GZ), .BMWORD(32)) u_sgpu (
    .clk, .rst_n, .scale,
    .pb_wr_ready, .pb_wr_en, .pb_wr_addr, .pb_wr_pos, .pb_wr_view, .pb_commit, .pb_commit_count,
    .sg_we, .sg_bank, .sg_valid, .sg_id, .sg_tg_base,
    .ht_we, .ht_bank, .ht_addr, .ht_data, .cb_we, .cb_addr, .cb_data,
    .tg_we, .tg_bank, .tg_addr, .tg_data, .bm_we, .bm_bank, .bm_addr, .bm_data,
    .fill_ready, .vec_valid, .vec_idx, .vec_data, .fill_commit, .fill_count,
    .dens_valid, .dens_tag, .dens_data,
    .cnt_points, .cnt_miss, .cnt_masked, .cnt_from_cb, .cnt_from_tg);

  mlp_unit #(.C(SA_COLS)) u_mlp (
    .clk, .rst_n,
    .fill_ready, .vec_valid, .vec_idx, .vec_data, .fill_commit, .fill_count,
    .wb_we, .wb_half, .wb_addr, .wb_data, .w_half,
    .res_valid, .res_ch, .res_data, .res_count, .busy(mlp_busy), .cnt_batches);
endmodule
