// index_density_buffer: the hash table of one subgrid. Each of the T
// entries holds the 18-bit unified index of a non-zero voxel (codebook
// entry below 4096, true-grid entry otherwise) and its FP16 density, as the
// paper's hash table entry does. Two banks (double buffering, drawn stacked
// in the paper's architecture figure): bank k mod 2 holds subgrid k.
// Interface and timing: synchronous read, rd_data one cycle after rd_en;
// one write port for the memory controller.
module index_density_buffer
  import spnerf_pkg::*;
#(
  parameter int unsigned DEPTH = HASH_T,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rd_en,
  input  logic          rd_bank,
  input  logic [AW-1:0] rd_addr,
  output hentry_t       rd_data,
  input  logic          wr_en,
  input  logic          wr_bank,
  input  logic [AW-1:0] wr_addr,
  input  hentry_t       wr_data
);
  hentry_t mem [2*DEPTH];                 // bank is the top address bit
  always_ff @(posedge clk) begin
    if (wr_en) mem[{wr_bank, wr_addr}] <= wr_data;
    if (rd_en) rd_data <= mem[{rd_bank, rd_addr}];
  end
endmodule
