// systolic_array: R x C output-stationary FP16 systolic array of the MLP
// unit. Row i computes for batch vector i, column j for output channel j of
// the current tile: PE(i,j) accumulates sum_k a_i[k] * W[k][j].
//
// At the edge, row i's input stream is delayed by i cycles and column j's
// weight stream by j cycles (skew registers), so a_i[k] and W[k][j] meet in
// PE(i,j) at cycle k + i + j after element k entered. With K elements fed on
// consecutive cycles starting at cycle 0, all accumulators are final after
// cycle K + R + C - 3, i.e. they can be read from cycle K + R + C - 2 on.
// Results are read one column at a time through rd_col / rd_data (a read
// multiplexer; this design's choice, the paper does not say how outputs
// leave the array).
// R = 64 follows from the input buffer, which delivers one element of each
// of the 64 batch vectors per read; C is not given by the paper (default 64,
// assumed).
module systolic_array
  import spnerf_pkg::*;
#(
  parameter int unsigned R = BATCH,
  parameter int unsigned C = 64,
  localparam int unsigned CW = (C > 1) ? $clog2(C) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          in_valid,
  input  fp16_t         a_in [R],
  input  fp16_t         b_in [C],
  input  logic [CW-1:0] rd_col,
  output fp16_t         rd_data [R]
);
  // skewed edges
  fp16_t a_edge [R];
  logic  v_edge [R];
  fp16_t b_edge [C];

  for (genvar i = 0; i < R; i++) begin : g_askew
    if (i == 0) begin : g_d0
      assign a_edge[i] = a_in[i];
      assign v_edge[i] = in_valid;
    end else begin : g_dn
      fp16_t ad [i];
      logic  vd [i];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int s = 0; s < i; s++) begin ad[s] <= FP16_ZERO; vd[s] <= 1'b0; end
        end else begin
          ad[0] <= a_in[i]; vd[0] <= in_valid;
          for (int s = 1; s < i; s++) begin ad[s] <= ad[s-1]; vd[s] <= vd[s-1]; end
        end
      end
      assign a_edge[i] = ad[i-1];
      assign v_edge[i] = vd[i-1];
    end
  end

  for (genvar j = 0; j < C; j++) begin : g_bskew
    if (j == 0) begin : g_d0
      assign b_edge[j] = b_in[j];
    end else begin : g_dn
      fp16_t bd [j];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int s = 0; s < j; s++) bd[s] <= FP16_ZERO;
        end else begin
          bd[0] <= b_in[j];
          for (int s = 1; s < j; s++) bd[s] <= bd[s-1];
        end
      end
      assign b_edge[j] = bd[j-1];
    end
  end

  // PE grid: horizontal links carry a and valid, vertical links carry b
  fp16_t ah  [R][C+1];
  logic  vh  [R][C+1];
  fp16_t bv  [R+1][C];
  fp16_t acc [R][C];

  for (genvar i = 0; i < R; i++) begin : g_row
    assign ah[i][0] = a_edge[i];
    assign vh[i][0] = v_edge[i];
  end
  for (genvar j = 0; j < C; j++) begin : g_col
    assign bv[0][j] = b_edge[j];
  end

  for (genvar i = 0; i < R; i++) begin : g_pr
    for (genvar j = 0; j < C; j++) begin : g_pc
      sa_pe u_pe (
        .clk, .rst_n, .clear,
        .v_in(vh[i][j]), .a_in(ah[i][j]), .b_in(bv[i][j]),
        .v_out(vh[i][j+1]), .a_out(ah[i][j+1]), .b_out(bv[i+1][j]),
        .acc(acc[i][j]));
    end
  end

  always_comb
    for (int i = 0; i < R; i++) rd_data[i] = acc[i][rd_col];
endmodule
