// mlp_controller: sequences the MLP unit through one batch, layer by layer
// (39(+1 pad) -> 128 -> 128 -> 3), tile by tile (C output channels per
// pass of the output-stationary array).
//
// For every tile:  CLEAR (1 cycle: zero the accumulators)
//                  FEED  (K cycles: read input row k and weight row
//                         base + tile*K + k; they enter the array one
//                         cycle later)
//                  FLUSH (R + C - 1 cycles: let the skewed wavefront finish)
//                  DRAIN (one cycle per output channel of the tile: column
//                         j of the array -> output-buffer row tile*C + j)
// After the last tile of a layer:
//                  ACT   (N cycles: output-buffer row r -> activation unit
//                         -> input buffer row r, or, for the last layer, to
//                         the result port)
//                  ACTW  (2 cycles: let the last row land)
// and after the last layer one DONE cycle releases the input-buffer half.
// Cycles per batch, from the first cycle out of IDLE to the DONE cycle
// included: 1 + sum over the three layers of (tiles * (K + R + C) + 2N + 2).
// The paper gives the unit's parts (array, activation, controller, buffers)
// and the layer sizes; this schedule is this design's choice.
module mlp_controller
  import spnerf_pkg::*;
#(
  parameter int unsigned R = BATCH,
  parameter int unsigned C = 64,
  localparam int unsigned CW = (C > 1) ? $clog2(C) : 1,
  localparam int unsigned WD = layer_base(3, C),
  localparam int unsigned WAW = $clog2(WD),
  localparam int unsigned RW = $clog2(HID)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           batch_avail,
  output logic           batch_release,
  output logic           ib_rd_en,
  output logic [RW-1:0]  ib_rd_row,
  output logic           wb_rd_en,
  output logic [WAW-1:0] wb_rd_addr,
  output logic           sa_clear,
  output logic           sa_in_valid,
  output logic [CW-1:0]  sa_rd_col,
  output logic           ob_wr_en,
  output logic [RW-1:0]  ob_wr_row,
  output logic           ob_rd_en,
  output logic [RW-1:0]  ob_rd_row,
  output logic           act_in_valid,
  output logic [RW-1:0]  act_in_row,
  output logic           act_relu,
  output logic           last_layer,
  output logic           busy
);
  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_FEED, S_FLUSH, S_DRAIN, S_ACT, S_ACTW, S_DONE} state_t;
  state_t      state;
  logic [1:0]  layer;
  logic [7:0]  tile, k, cnt;
  logic [8:0]  lk, ln, ltiles, ncol;
  logic [WAW-1:0] lbase;

  always_comb begin
    unique case (layer)
      2'd0:    begin lk = 9'(layer_k(0)); ln = 9'(layer_n(0)); ltiles = 9'(layer_tiles(0, C)); lbase = WAW'(layer_base(0, C)); end
      2'd1:    begin lk = 9'(layer_k(1)); ln = 9'(layer_n(1)); ltiles = 9'(layer_tiles(1, C)); lbase = WAW'(layer_base(1, C)); end
      default: begin lk = 9'(layer_k(2)); ln = 9'(layer_n(2)); ltiles = 9'(layer_tiles(2, C)); lbase = WAW'(layer_base(2, C)); end
    endcase
    ncol = (ln - 9'(tile) * 9'(C) < 9'(C)) ? ln - 9'(tile) * 9'(C) : 9'(C);
  end

  assign busy          = (state != S_IDLE);
  assign batch_release = (state == S_DONE);
  assign sa_clear      = (state == S_CLEAR);
  assign ib_rd_en      = (state == S_FEED);
  assign ib_rd_row     = RW'(k);
  assign wb_rd_en      = (state == S_FEED);
  assign wb_rd_addr    = lbase + WAW'(tile) * WAW'(lk) + WAW'(k);
  assign ob_wr_en      = (state == S_DRAIN);
  assign sa_rd_col     = CW'(cnt);
  assign ob_wr_row     = RW'(9'(tile) * 9'(C) + 9'(cnt));
  assign ob_rd_en      = (state == S_ACT);
  assign ob_rd_row     = RW'(cnt);
  assign act_relu      = (layer != 2'd2);
  assign last_layer    = (layer == 2'd2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; layer <= '0; tile <= '0; k <= '0; cnt <= '0;
      sa_in_valid <= 1'b0; act_in_valid <= 1'b0; act_in_row <= '0;
    end else begin
      sa_in_valid  <= (state == S_FEED);
      act_in_valid <= (state == S_ACT);
      act_in_row   <= RW'(cnt);
      unique case (state)
        S_IDLE:  if (batch_avail) begin state <= S_CLEAR; layer <= '0; tile <= '0; end
        S_CLEAR: begin state <= S_FEED; k <= '0; end
        S_FEED:  if (9'(k) == lk - 9'd1) begin state <= S_FLUSH; cnt <= '0; end
                 else k <= k + 8'd1;
        S_FLUSH: if (cnt == 8'(R + C - 2)) begin state <= S_DRAIN; cnt <= '0; end
                 else cnt <= cnt + 8'd1;
        S_DRAIN: if (9'(cnt) == ncol - 9'd1) begin
                   cnt <= '0;
                   if (9'(tile) == ltiles - 9'd1) state <= S_ACT;
                   else begin tile <= tile + 8'd1; state <= S_CLEAR; end
                 end else cnt <= cnt + 8'd1;
        S_ACT:   if (9'(cnt) == ln - 9'd1) begin state <= S_ACTW; cnt <= '0; end
                 else cnt <= cnt + 8'd1;
        S_ACTW:  if (cnt == 8'd1) begin
                   cnt <= '0; tile <= '0;
                   if (layer == 2'd2) state <= S_DONE;
                   else begin layer <= layer + 2'd1; state <= S_CLEAR; end
                 end else cnt <= cnt + 8'd1;
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
