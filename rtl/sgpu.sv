// sgpu: Sparse Grid Processing Unit. Decodes the sparse voxel grid online
// for a batch of sample points and writes, for each point, the MLP input
// vector [interpolated color features (12) | view direction (27) | 0].
//
// Dataflow, as in the paper's architecture figure: position buffer ->
// grid ID unit (8 vertices and weights per point) -> bitmap lookup unit and
// hash mapping unit in parallel (the bitmap bit masks the hash result) ->
// trilinear interpolation unit -> MLP input buffer. The interpolated
// density leaves on dens_* (the paper does not describe the volume
// rendering step that consumes it).
//
// Subgrids (this design's handling; the paper only says each subgrid has
// its own hash table and the bitmap of the "current subgrid" is on chip):
// a vertex with x coordinate x belongs to subgrid k = x / SUBGRID_W and is
// looked up in bank k mod 2 of the hash table, bitmap and true-grid
// buffers. The memory controller announces what a bank holds through sg_*
// (valid, subgrid id, first true-grid index). A vertex whose subgrid is not
// loaded is decoded as zero and counted in cnt_miss. Points must arrive
// sorted by subgrid, and subgrids k and k+1 must be loaded while points of
// subgrid k are processed.
//
// Batch control (this design's choice): when the position buffer holds a
// committed batch and the MLP input buffer has a free half (fill_ready),
// the points are issued one every 8 cycles (one vertex per cycle); when all
// results are written the input-buffer half is committed (fill_commit,
// fill_count) and the position-buffer bank released. Vertex latency: GID
// output to HMU output 3 cycles, TIU 2 more, vector write 1 more.
module sgpu
  import spnerf_pkg::*;
#(
  parameter int unsigned HT  = HASH_T,
  parameter int unsigned CBD = CB_ENTRIES,
  parameter int unsigned TGD = TG_DEPTH,
  parameter int unsigned SGW = SUBGRID_W,
  parameter int unsigned GY  = GRID_DIM,
  parameter int unsigned GZ  = GRID_DIM,
  parameter int unsigned BMWORD = 32,
  localparam int unsigned HW  = $clog2(HT),
  localparam int unsigned CBW = $clog2(CBD),
  localparam int unsigned TGW = $clog2(TGD),
  localparam int unsigned BMD = (SGW * GY * GZ + BMWORD - 1) / BMWORD,
  localparam int unsigned BMW = $clog2(BMD),
  localparam int unsigned VLEN = N_FEAT + N_VIEW + 1     // 40, padded
) (
  input  logic             clk,
  input  logic             rst_n,
  input  fp16_t            scale,            // de-quantisation scale s
  // position buffer producer side
  output logic             pb_wr_ready,
  input  logic             pb_wr_en,
  input  logic [5:0]       pb_wr_addr,
  input  fpos_t            pb_wr_pos,
  input  fp16_t            pb_wr_view [N_VIEW],
  input  logic             pb_commit,
  input  logic [6:0]       pb_commit_count,
  // subgrid bank descriptors
  input  logic             sg_we,
  input  logic             sg_bank,
  input  logic             sg_valid,
  input  logic [5:0]       sg_id,
  input  logic [IDX_W-1:0] sg_tg_base,
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
  input  logic [7:0]       tg_data [N_FEAT],
  input  logic             bm_we,
  input  logic             bm_bank,
  input  logic [BMW-1:0]   bm_addr,
  input  logic [BMWORD-1:0] bm_data,
  // MLP input buffer, producer side
  input  logic             fill_ready,
  output logic             vec_valid,
  output logic [5:0]       vec_idx,
  output fp16_t            vec_data [VLEN],
  output logic             fill_commit,
  output logic [6:0]       fill_count,
  // interpolated density
  output logic             dens_valid,
  output logic [5:0]       dens_tag,
  output fp16_t            dens_data,
  // status counters
  output logic [31:0]      cnt_points,
  output logic [31:0]      cnt_miss,
  output logic [31:0]      cnt_masked,
  output logic [31:0]      cnt_from_cb,
  output logic [31:0]      cnt_from_tg
);
  // ---------------- position buffer + batch control ----------------
  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_DRAIN} state_t;
  state_t      state;
  logic        pb_avail;
  logic [6:0]  pb_count, n_issued, n_done;
  fpos_t       pos_q;
  fp16_t       view_q [N_VIEW];
  logic        pd_ok, gid_in_valid, gid_in_ready, accept;
  logic        tiu_valid;
  logic [5:0]  tiu_tag;
  fp16_t       tiu_feat [N_FEAT];
  fp16_t       tiu_dens;
  logic        release_pb;

  position_buffer #(.DEPTH(BATCH)) u_pb (
    .clk, .rst_n,
    .wr_ready(pb_wr_ready), .wr_en(pb_wr_en), .wr_addr(pb_wr_addr), .wr_pos(pb_wr_pos),
    .wr_view(pb_wr_view), .commit(pb_commit), .commit_count(pb_commit_count),
    .rd_avail(pb_avail), .rd_count(pb_count),
    .pos_addr(n_issued[5:0]), .pos_data(pos_q),
    .view_addr(tiu_tag), .view_data(view_q),
    .release_bank(release_pb));

  assign gid_in_valid = (state == S_ISSUE) && pd_ok;
  assign accept       = gid_in_valid && gid_in_ready;
  assign release_pb   = (state == S_DRAIN) && (n_done == pb_count) && !vec_valid;
  assign fill_commit  = release_pb;
  assign fill_count   = pb_count;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; n_issued <= '0; n_done <= '0; pd_ok <= 1'b0;
    end else begin
      pd_ok <= (state == S_ISSUE) && !accept;
      if (vec_valid) n_done <= n_done + 7'd1;
      unique case (state)
        S_IDLE: if (pb_avail && fill_ready) begin
          state <= S_ISSUE; n_issued <= '0; n_done <= '0; pd_ok <= 1'b0;
        end
        S_ISSUE: if (accept) begin
          n_issued <= n_issued + 7'd1;
          if (n_issued + 7'd1 == pb_count) state <= S_DRAIN;
        end
        S_DRAIN: if (release_pb) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- grid ID unit ----------------
  logic    v0;
  vcoord_t c0;
  vside_t  side0;
  grid_id_unit u_gid (
    .clk, .rst_n, .in_valid(gid_in_valid), .in_ready(gid_in_ready), .in_pos(pos_q),
    .in_tag(n_issued[5:0]), .out_valid(v0), .out_coord(c0), .out_side(side0));

  // ---------------- subgrid selection ----------------
  logic             sgv [2];
  logic [5:0]       sgid [2];
  logic [IDX_W-1:0] sgbase [2];
  logic [COORD_W-1:0] k0, xbase0;
  logic             bank0, hit0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < 2; b++) begin sgv[b] <= 1'b0; sgid[b] <= '0; sgbase[b] <= '0; end
    end else if (sg_we) begin
      sgv[sg_bank] <= sg_valid; sgid[sg_bank] <= sg_id; sgbase[sg_bank] <= sg_tg_base;
    end
  end

  always_comb begin
    k0     = c0.x / COORD_W'(SGW);
    xbase0 = COORD_W'(k0 * COORD_W'(SGW));
    bank0  = k0[0];
    hit0   = sgv[bank0] && (COORD_W'(sgid[bank0]) == k0);
  end

  // ---------------- bitmap lookup unit ----------------
  logic bm_bit, bm_bit_q;
  bitmap_lookup_unit #(.GW(SGW), .GY(GY), .GZ(GZ), .WORD(BMWORD)) u_blu (
    .clk, .rd_en(v0), .coord(c0), .x_base(xbase0), .rd_bank(bank0), .rd_bit(bm_bit),
    .wr_en(bm_we), .wr_bank(bm_bank), .wr_addr(bm_addr), .wr_data(bm_data));
  always_ff @(posedge clk) bm_bit_q <= bm_bit;

  // ---------------- hash mapping unit ----------------
  logic   h_valid, h_from_tg, h_miss, h_masked, h_from_cb;
  fp16_t  h_feat [N_FEAT];
  fp16_t  h_dens;
  vside_t h_side;
  hash_mapping_unit #(.HT(HT), .CBD(CBD), .TGD(TGD)) u_hmu (
    .clk, .rst_n,
    .in_valid(v0), .in_coord(c0), .in_bank(bank0), .in_hit(hit0), .in_tg_base(sgbase[bank0]),
    .in_side(side0), .mask_bit(bm_bit_q),
    .out_valid(h_valid), .out_from_tg(h_from_tg), .out_miss(h_miss), .out_masked(h_masked),
    .out_from_cb(h_from_cb), .out_feat(h_feat), .out_density(h_dens), .out_side(h_side),
    .ht_we, .ht_bank, .ht_addr, .ht_data, .cb_we, .cb_addr, .cb_data,
    .tg_we, .tg_bank, .tg_addr, .tg_data);

  // ---------------- trilinear interpolation unit ----------------
  trilinear_interp_unit u_tiu (
    .clk, .rst_n, .scale,
    .in_valid(h_valid), .in_from_tg(h_from_tg), .in_feat(h_feat), .in_density(h_dens),
    .in_side(h_side),
    .out_valid(tiu_valid), .out_tag(tiu_tag), .out_feat(tiu_feat), .out_density(tiu_dens));

  assign dens_valid = tiu_valid;
  assign dens_tag   = tiu_tag;
  assign dens_data  = tiu_dens;

  // ---------------- concatenation with the view direction ----------------
  fp16_t feat_q [N_FEAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vec_valid <= 1'b0; vec_idx <= '0;
      for (int i = 0; i < N_FEAT; i++) feat_q[i] <= FP16_ZERO;
    end else begin
      vec_valid <= tiu_valid;
      if (tiu_valid) begin
        vec_idx <= tiu_tag;
        for (int i = 0; i < N_FEAT; i++) feat_q[i] <= tiu_feat[i];
      end
    end
  end
  always_comb begin
    for (int i = 0; i < N_FEAT; i++) vec_data[i] = feat_q[i];
    for (int i = 0; i < N_VIEW; i++) vec_data[N_FEAT + i] = view_q[i];
    vec_data[VLEN-1] = FP16_ZERO;                 // pad 39 -> 40
  end

  // ---------------- status counters ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_points <= '0; cnt_miss <= '0; cnt_masked <= '0; cnt_from_cb <= '0; cnt_from_tg <= '0;
    end else begin
      if (tiu_valid) cnt_points  <= cnt_points + 1;
      if (h_miss)    cnt_miss    <= cnt_miss + 1;
      if (h_masked)  cnt_masked  <= cnt_masked + 1;
      if (h_from_cb) cnt_from_cb <= cnt_from_cb + 1;
      if (h_valid && h_from_tg) cnt_from_tg <= cnt_from_tg + 1;
    end
  end

  a_fill_free: assert property (@(posedge clk) disable iff (!rst_n)
                                (state == S_ISSUE) |-> fill_ready);
endmodule
