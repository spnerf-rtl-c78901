// trilinear_interp_unit (TIU): C_interp = sum_{i=1..8} w_i * (s * C_i).
//
// Stage 1 turns each lane of a decoded vertex into FP16: a true-grid lane
// (INT8) is converted exactly to FP16 and multiplied by the de-quantisation
// scale s; a codebook lane is used as it is. It then multiplies every lane,
// and the density, by the vertex weight from the grid ID unit. Stage 2 adds
// the weighted values of the eight vertices of a point, in arrival order,
// into FP16 accumulators. Multiplication order and operand rounding follow
// the paper's formula: w_i * (s * C_i), each product rounded to FP16.
// The paper interpolates the color features; interpolating the density with
// the same weights is this design's reading of its architecture figure,
// where the density also flows into this unit.
//
// Interface and timing: one vertex per cycle on in_*; a point's result
// leaves on out_* two cycles after its eighth vertex (in_side.last) and is
// held until the next point completes. No stalls.
module trilinear_interp_unit
  import spnerf_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  fp16_t      scale,
  input  logic       in_valid,
  input  logic       in_from_tg,
  input  fp16_t      in_feat [N_FEAT],
  input  fp16_t      in_density,
  input  vside_t     in_side,
  output logic       out_valid,
  output logic [5:0] out_tag,
  output fp16_t      out_feat [N_FEAT],
  output fp16_t      out_density
);
  // stage 1: de-quantise and weight
  fp16_t deq [N_FEAT];
  fp16_t cin [N_FEAT];
  fp16_t wc  [N_FEAT+1];
  for (genvar i = 0; i < N_FEAT; i++) begin : g_lane
    fp16_mul u_deq (.a(scale), .b(s8_to_fp16(in_feat[i][7:0])), .y(deq[i]));
    assign cin[i] = in_from_tg ? deq[i] : in_feat[i];
    fp16_mul u_w (.a(in_side.weight), .b(cin[i]), .y(wc[i]));
  end
  fp16_mul u_wd (.a(in_side.weight), .b(in_density), .y(wc[N_FEAT]));

  fp16_t      wc_q [N_FEAT+1];
  logic       v1, last1;
  logic [5:0] tag1;

  // stage 2: accumulate
  fp16_t acc   [N_FEAT+1];
  fp16_t acc_n [N_FEAT+1];
  logic  start;                       // next vertex begins a new point
  for (genvar i = 0; i <= N_FEAT; i++) begin : g_acc
    fp16_add u_acc (.a(start ? FP16_ZERO : acc[i]), .b(wc_q[i]), .y(acc_n[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; last1 <= 1'b0; tag1 <= '0; start <= 1'b1;
      out_valid <= 1'b0; out_tag <= '0; out_density <= FP16_ZERO;
      for (int i = 0; i <= N_FEAT; i++) begin wc_q[i] <= FP16_ZERO; acc[i] <= FP16_ZERO; end
      for (int i = 0; i < N_FEAT; i++) out_feat[i] <= FP16_ZERO;
    end else begin
      v1    <= in_valid;
      last1 <= in_side.last;
      tag1  <= in_side.tag;
      if (in_valid) for (int i = 0; i <= N_FEAT; i++) wc_q[i] <= wc[i];
      out_valid <= 1'b0;
      if (v1) begin
        for (int i = 0; i <= N_FEAT; i++) acc[i] <= acc_n[i];
        start <= last1;
        if (last1) begin
          out_valid   <= 1'b1;
          out_tag     <= tag1;
          out_density <= acc_n[N_FEAT];
          for (int i = 0; i < N_FEAT; i++) out_feat[i] <= acc_n[i];
        end
      end
    end
  end
endmodule
