// hash_mapping_unit (HMU): the core of online sparse-grid decoding. For one
// voxel-grid vertex per cycle it
//   1. computes the hash index (hash_index_unit, paper Eq. 1),
//   2. reads the subgrid's hash table (index_density_buffer) for the 18-bit
//      unified index and the density,
//   3. sends indices below CB_ENTRIES (4096) to the color codebook (FP16
//      vectors) and the others to the true-grid buffer (INT8 vectors, at
//      address index - 4096 - tg_base, tg_base being the first true-grid
//      index held by the subgrid's bank: this design's choice, as the paper
//      does not say how the 18-bit space maps onto the buffer),
//   4. selects between the two results and, with the bit from the bitmap
//      lookup unit, replaces color feature and density by zero where the
//      bitmap says the vertex is empty (the two zero-muxes of the paper's
//      architecture figure).
// A vertex whose subgrid is not loaded in its bank (hit = 0) is also
// zeroed and flagged on out_miss; this is this design's choice. out_masked
// flags a vertex zeroed by the bitmap, out_from_cb / out_from_tg the source
// of a kept vertex (status for performance counters).
//
// Timing: in_* at cycle 0; mask_bit is sampled at cycle 2 (the bitmap lookup
// result delayed by one register); out_* registered at cycle 3. Fully
// pipelined, one vertex per cycle, no stalls. With out_from_tg = 1 the low
// 8 bits of each out_feat lane carry the signed INT8 value; otherwise the
// lanes are FP16 (codebook) values.
module hash_mapping_unit
  import spnerf_pkg::*;
#(
  parameter int unsigned HT  = HASH_T,
  parameter int unsigned CBD = CB_ENTRIES,
  parameter int unsigned TGD = TG_DEPTH,
  localparam int unsigned HW  = $clog2(HT),
  localparam int unsigned CBW = $clog2(CBD),
  localparam int unsigned TGW = $clog2(TGD)
) (
  input  logic             clk,
  input  logic             rst_n,
  // vertex in
  input  logic             in_valid,
  input  vcoord_t          in_coord,
  input  logic             in_bank,
  input  logic             in_hit,
  input  logic [IDX_W-1:0] in_tg_base,
  input  vside_t           in_side,
  input  logic             mask_bit,
  // decoded vertex out
  output logic             out_valid,
  output logic             out_from_tg,
  output logic             out_miss,
  output logic             out_masked,
  output logic             out_from_cb,
  output fp16_t            out_feat [N_FEAT],
  output fp16_t            out_density,
  output vside_t           out_side,
  // buffer fill ports
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
  input  logic [7:0]       tg_data [N_FEAT]
);
  logic [HW-1:0] hidx;
  hash_index_unit #(.HW(HW)) u_hash (.coord(in_coord), .index(hidx));

  hentry_t ent;
  index_density_buffer #(.DEPTH(HT)) u_idb (
    .clk, .rd_en(in_valid), .rd_bank(in_bank), .rd_addr(hidx), .rd_data(ent),
    .wr_en(ht_we), .wr_bank(ht_bank), .wr_addr(ht_addr), .wr_data(ht_data));

  // stage 1
  logic             v1, hit1, bank1;
  logic [IDX_W-1:0] base1;
  vside_t           side1;
  logic             is_cb;
  logic [IDX_W-1:0] tg_off;

  always_comb begin
    is_cb  = (ent.index < IDX_W'(CB_ENTRIES));
    tg_off = ent.index - IDX_W'(CB_ENTRIES) - base1;
  end

  fp16_t      cb_q [N_FEAT];
  logic [7:0] tg_q [N_FEAT];
  color_codebook #(.DEPTH(CBD)) u_cb (
    .clk, .rd_en(v1 && is_cb), .rd_addr(CBW'(ent.index)), .rd_data(cb_q),
    .wr_en(cb_we), .wr_addr(cb_addr), .wr_data(cb_data));
  true_grid_buffer #(.DEPTH(TGD)) u_tg (
    .clk, .rd_en(v1 && !is_cb), .rd_bank(bank1), .rd_addr(TGW'(tg_off)), .rd_data(tg_q),
    .wr_en(tg_we), .wr_bank(tg_bank), .wr_addr(tg_addr), .wr_data(tg_data));

  // stage 2
  logic   v2, hit2, is_cb2;
  fp16_t  dens2;
  vside_t side2;
  logic   keep;
  assign keep = hit2 && mask_bit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; out_valid <= 1'b0;
      hit1 <= 1'b0; bank1 <= 1'b0; base1 <= '0; side1 <= '0;
      hit2 <= 1'b0; is_cb2 <= 1'b0; dens2 <= FP16_ZERO; side2 <= '0;
      out_from_tg <= 1'b0; out_miss <= 1'b0; out_masked <= 1'b0; out_from_cb <= 1'b0; out_density <= FP16_ZERO; out_side <= '0;
      for (int i = 0; i < N_FEAT; i++) out_feat[i] <= FP16_ZERO;
    end else begin
      v1 <= in_valid; hit1 <= in_hit; bank1 <= in_bank; base1 <= in_tg_base; side1 <= in_side;
      v2 <= v1; hit2 <= hit1; is_cb2 <= is_cb; dens2 <= ent.density; side2 <= side1;
      out_valid   <= v2;
      out_side    <= side2;
      out_miss    <= v2 && !hit2;
      out_from_tg <= keep && !is_cb2;
      out_from_cb <= v2 && keep && is_cb2;
      out_masked  <= v2 && hit2 && !mask_bit;
      out_density <= keep ? dens2 : FP16_ZERO;
      for (int i = 0; i < N_FEAT; i++)
        out_feat[i] <= !keep ? FP16_ZERO : is_cb2 ? cb_q[i] : {8'b0, tg_q[i]};
    end
  end
endmodule
