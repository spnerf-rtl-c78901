// grid_id_unit (GID): turns one sample position into the eight surrounding
// voxel-grid vertices and their trilinear weights.
//
// For each axis the integer part g0 = floor(p) is taken from the FP16 bit
// pattern, converted back to FP16 and subtracted from p with an FP16
// subtractor, giving f = p - g0; a second subtractor gives 1 - f. The two
// neighbouring vertices on that axis are g0 (weight 1 - |p - g0| = 1 - f)
// and g0 + 1 (weight 1 - |p - (g0 + 1)| = f). The weight of vertex i, with
// i[0], i[1], i[2] choosing the upper neighbour in x, y, z, is
// (wx * wy) * wz, computed with FP16 multipliers in that order, as in the
// paper's equation w = (1-|xp-xg|)(1-|yp-yg|)(1-|zp-zg|).
// The paper calls the two neighbours the "ceiling and round results"; this
// design uses floor and floor + 1, which equal floor and ceiling whenever p
// is not an integer and keep the eight weights summing to one when it is.
// Positions must be non-negative and below GRID_DIM - 1 (host's duty).
//
// Interface and timing: a point is accepted when in_valid && in_ready; the
// weights are registered one cycle later, and the eight vertices then leave
// on consecutive cycles (out_valid, one vertex per cycle, out_side.last on
// the eighth), so the unit accepts one point every 8 cycles. The vertex
// stream cannot be stalled (the SGPU downstream is a fixed pipeline).
module grid_id_unit
  import spnerf_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  fpos_t      in_pos,
  input  logic [5:0] in_tag,
  output logic       out_valid,
  output vcoord_t    out_coord,
  output vside_t     out_side
);
  // floor of a non-negative FP16 value below 2^COORD_W
  function automatic logic [COORD_W-1:0] ffloor(fp16_t h);
    logic [4:0] e;
    logic [10:0] m;
    e = h[14:10];
    m = {1'b1, h[9:0]};
    if (h[15] || e < 5'd15) return '0;
    if (e > 5'(15 + COORD_W - 1)) return '1;
    return COORD_W'(m >> (5'd25 - e));
  endfunction

  fp16_t p [3];
  fp16_t g0f [3], f [3], omf [3];     // floor as FP16, fraction, 1 - fraction
  logic [COORD_W-1:0] g0 [3];
  fp16_t wxy [4];
  fp16_t w [8];

  assign p[0] = in_pos.x;
  assign p[1] = in_pos.y;
  assign p[2] = in_pos.z;

  for (genvar a = 0; a < 3; a++) begin : g_axis
    assign g0[a]  = ffloor(p[a]);
    assign g0f[a] = u2fp16(11'(g0[a]));
    fp16_add u_frac (.a(p[a]),    .b({~g0f[a][15], g0f[a][14:0]}), .y(f[a]));
    fp16_add u_omf  (.a(FP16_ONE), .b({~f[a][15],   f[a][14:0]}),   .y(omf[a]));
  end

  for (genvar i = 0; i < 4; i++) begin : g_wxy
    fp16_mul u_mxy (.a(i[0] ? f[0] : omf[0]), .b(i[1] ? f[1] : omf[1]), .y(wxy[i]));
  end
  for (genvar i = 0; i < 8; i++) begin : g_w
    fp16_mul u_mz (.a(wxy[i % 4]), .b(i[2] ? f[2] : omf[2]), .y(w[i]));
  end

  // registered point, serialised over 8 cycles
  fp16_t              w_q [8];
  logic [COORD_W-1:0] g0_q [3];
  logic [5:0]         tag_q;
  logic               busy;
  logic [2:0]         vcnt;

  assign in_ready = !busy || (vcnt == 3'd7);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      vcnt  <= '0;
      tag_q <= '0;
      for (int a = 0; a < 3; a++) g0_q[a] <= '0;
      for (int i = 0; i < 8; i++) w_q[i] <= FP16_ZERO;
    end else begin
      if (busy) vcnt <= vcnt + 3'd1;
      if (in_valid && in_ready) begin
        busy  <= 1'b1;
        vcnt  <= '0;
        tag_q <= in_tag;
        for (int a = 0; a < 3; a++) g0_q[a] <= g0[a];
        for (int i = 0; i < 8; i++) w_q[i] <= w[i];
      end else if (busy && vcnt == 3'd7) begin
        busy <= 1'b0;
      end
    end
  end

  always_comb begin
    out_valid        = busy;
    out_coord.x      = g0_q[0] + COORD_W'(vcnt[0]);
    out_coord.y      = g0_q[1] + COORD_W'(vcnt[1]);
    out_coord.z      = g0_q[2] + COORD_W'(vcnt[2]);
    out_side.weight  = w_q[vcnt];
    out_side.tag     = tag_q;
    out_side.last    = (vcnt == 3'd7);
  end
endmodule
