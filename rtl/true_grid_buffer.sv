// true_grid_buffer: color features of the voxels kept un-quantised by VQRF
// ("true voxel grid"), 12 INT8 values per entry as stored off chip; they
// are de-quantised later in the trilinear interpolation unit. Two banks,
// bank k mod 2 holding the entries of subgrid k. The depth per bank
// (TG_DEPTH, 8192) is this design's choice; the paper gives only the total
// SGPU SRAM (571 KB).
// Interface and timing: synchronous read, rd_data one cycle after rd_en;
// one write port for the memory controller.
module true_grid_buffer
  import spnerf_pkg::*;
#(
  parameter int unsigned DEPTH = TG_DEPTH,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rd_en,
  input  logic          rd_bank,
  input  logic [AW-1:0] rd_addr,
  output logic [7:0]    rd_data [N_FEAT],
  input  logic          wr_en,
  input  logic          wr_bank,
  input  logic [AW-1:0] wr_addr,
  input  logic [7:0]    wr_data [N_FEAT]
);
  logic [N_FEAT*8-1:0] mem [2*DEPTH];     // bank is the top address bit
  logic [N_FEAT*8-1:0] q;
  logic [N_FEAT*8-1:0] wd;
  always_comb
    for (int i = 0; i < N_FEAT; i++) wd[i*8 +: 8] = wr_data[i];
  always_ff @(posedge clk) begin
    if (wr_en) mem[{wr_bank, wr_addr}] <= wd;
    if (rd_en) q <= mem[{rd_bank, rd_addr}];
  end
  always_comb
    for (int i = 0; i < N_FEAT; i++) rd_data[i] = q[i*8 +: 8];
endmodule
