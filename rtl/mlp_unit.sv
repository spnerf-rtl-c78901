// mlp_unit: the MLP Unit. Evaluates the 3-layer MLP (39 -> 128 -> 128 -> 3,
// ReLU between layers) for a batch of 64 sample points on an
// output-stationary R x C FP16 systolic array.
//
// Parts, as in the paper's architecture figure: the double-buffered input
// buffer in block-circulant format (filled by the SGPU, one vector at a
// time), the double-buffered weight buffer, the systolic array, the output
// buffer, the activation unit (output buffer -> activation -> input buffer)
// and the controller. The last layer's three output rows (R, G, B, each for
// all 64 points) leave on res_*; res_count says how many of the 64 lanes
// carry real points.
//
// Interface: vec_* / fill_* towards the SGPU (see mlp_input_buffer),
// wb_* for loading weights into a weight-buffer half, w_half selecting the
// half in use. Timing per batch: see mlp_controller.
module mlp_unit
  import spnerf_pkg::*;
#(
  parameter int unsigned C = 64,
  localparam int unsigned R = BATCH,
  localparam int unsigned WD = layer_base(3, C),
  localparam int unsigned WAW = $clog2(WD),
  localparam int unsigned CW = (C > 1) ? $clog2(C) : 1,
  localparam int unsigned RW = $clog2(HID),
  localparam int unsigned VLEN = IN_LEN + 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // from SGPU
  output logic           fill_ready,
  input  logic           vec_valid,
  input  logic [5:0]     vec_idx,
  input  fp16_t          vec_data [VLEN],
  input  logic           fill_commit,
  input  logic [6:0]     fill_count,
  // weights
  input  logic           wb_we,
  input  logic           wb_half,
  input  logic [WAW-1:0] wb_addr,
  input  fp16_t          wb_data [C],
  input  logic           w_half,
  // results
  output logic           res_valid,
  output logic [1:0]     res_ch,
  output fp16_t          res_data [R],
  output logic [6:0]     res_count,
  output logic           busy,
  output logic [31:0]    cnt_batches
);
  logic          batch_avail, batch_release, vec_busy;
  logic [6:0]    batch_count;
  logic          ib_rd_en, wb_rd_en, sa_clear, sa_in_valid, ob_wr_en, ob_rd_en;
  logic          act_in_valid, act_relu, last_layer, act_out_valid;
  logic [RW-1:0] ib_rd_row, ob_wr_row, ob_rd_row, act_in_row, act_out_row;
  logic [WAW-1:0] wb_rd_addr;
  logic [CW-1:0] sa_rd_col;
  fp16_t         ib_q [R];
  fp16_t         wb_q [C];
  fp16_t         sa_col [R];
  fp16_t         ob_q [R];
  fp16_t         act_q [R];

  mlp_input_buffer #(.ROWS(HID), .VLEN(VLEN)) u_ib (
    .clk, .rst_n,
    .fill_ready, .vec_valid, .vec_idx, .vec_data, .vec_busy, .fill_commit, .fill_count,
    .batch_avail, .batch_count, .batch_release,
    .row_we(act_out_valid && !last_layer), .row_row(act_out_row), .row_data(act_q),
    .rd_en(ib_rd_en), .rd_row(ib_rd_row), .rd_data(ib_q));

  weight_buffer #(.C(C)) u_wb (
    .clk, .wr_en(wb_we), .wr_half(wb_half), .wr_addr(wb_addr), .wr_data(wb_data),
    .rd_en(wb_rd_en), .rd_half(w_half), .rd_addr(wb_rd_addr), .rd_data(wb_q));

  systolic_array #(.R(R), .C(C)) u_sa (
    .clk, .rst_n, .clear(sa_clear), .in_valid(sa_in_valid), .a_in(ib_q), .b_in(wb_q),
    .rd_col(sa_rd_col), .rd_data(sa_col));

  output_buffer #(.ROWS(HID), .NV(R)) u_ob (
    .clk, .wr_en(ob_wr_en), .wr_row(ob_wr_row), .wr_data(sa_col),
    .rd_en(ob_rd_en), .rd_row(ob_rd_row), .rd_data(ob_q));

  activation_unit #(.NV(R), .RW(RW)) u_act (
    .clk, .rst_n, .relu(act_relu), .in_valid(act_in_valid), .in_row(act_in_row), .in_data(ob_q),
    .out_valid(act_out_valid), .out_row(act_out_row), .out_data(act_q));

  mlp_controller #(.R(R), .C(C)) u_ctl (
    .clk, .rst_n, .batch_avail, .batch_release,
    .ib_rd_en, .ib_rd_row, .wb_rd_en, .wb_rd_addr, .sa_clear, .sa_in_valid, .sa_rd_col,
    .ob_wr_en, .ob_wr_row, .ob_rd_en, .ob_rd_row, .act_in_valid, .act_in_row, .act_relu,
    .last_layer, .busy);

  assign res_valid = act_out_valid && last_layer;
  assign res_ch    = 2'(act_out_row);
  assign res_data  = act_q;
  assign res_count = batch_count;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)             cnt_batches <= '0;
    else if (batch_release) cnt_batches <= cnt_batches + 1;
  end
endmodule
