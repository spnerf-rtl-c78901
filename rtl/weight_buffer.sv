// weight_buffer: MLP weights, double-buffered (two halves, so the weights of
// the next scene can be loaded while the current ones are in use). A row
// holds C FP16 weights, W[k][tile*C + j] for j = 0..C-1 (zero beyond the
// layer's outputs); the rows of the three layers follow each other as laid
// out by spnerf_pkg::layer_base: DEPTH = 464 rows for C = 64. Feeding one
// row per cycle gives the top edge of the systolic array one weight per
// column. Interface and timing: write port (half, addr, row), synchronous
// read, rd_data one cycle after rd_en.
module weight_buffer
  import spnerf_pkg::*;
#(
  parameter int unsigned C = 64,
  parameter int unsigned DEPTH = layer_base(3, C),
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic          wr_half,
  input  logic [AW-1:0] wr_addr,
  input  fp16_t         wr_data [C],
  input  logic          rd_en,
  input  logic          rd_half,
  input  logic [AW-1:0] rd_addr,
  output fp16_t         rd_data [C]
);
  logic [C*16-1:0] mem [2*(2**AW)];       // half is the top address bit
  logic [C*16-1:0] q, wd;
  always_comb
    for (int j = 0; j < C; j++) wd[j*16 +: 16] = wr_data[j];
  always_ff @(posedge clk) begin
    if (wr_en) mem[{wr_half, wr_addr}] <= wd;
    if (rd_en) q <= mem[{rd_half, rd_addr}];
  end
  always_comb
    for (int j = 0; j < C; j++) rd_data[j] = q[j*16 +: 16];
endmodule
