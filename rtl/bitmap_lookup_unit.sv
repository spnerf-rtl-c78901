// bitmap_lookup_unit (BLU): one bit per voxel-grid point of a subgrid,
// 1 = non-zero, 0 = zero; used to force to zero the values that a hash
// collision would otherwise return for empty vertices.
//
// As in the paper, the masks are stored back to back in one contiguous
// memory and the vertex position itself forms the address: the linear
// offset ((x - k*w) * GY + y) * GZ + z inside subgrid k selects a WORD-bit
// word with its upper bits and the bit inside the word with its low bits.
// This design keeps two subgrids, one per bank, with subgrid k in bank
// k mod 2 (the paper: "all buffers ... are double-buffered"), so a point
// whose vertices straddle subgrids k and k+1 finds both.
//
// Interface and timing: rd_en with coord and the subgrid's bank and first
// x (x_base) returns rd_bit one cycle later. Writes are word-wide through
// wr_en / wr_bank / wr_addr / wr_data (from the memory controller).
module bitmap_lookup_unit
  import spnerf_pkg::*;
#(
  parameter int unsigned GW   = SUBGRID_W,   // subgrid width in x
  parameter int unsigned GY   = GRID_DIM,
  parameter int unsigned GZ   = GRID_DIM,
  parameter int unsigned WORD = 32,
  localparam int unsigned NBITS = GW * GY * GZ,
  localparam int unsigned DEPTH = (NBITS + WORD - 1) / WORD,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rd_en,
  input  vcoord_t            coord,
  input  logic [COORD_W-1:0] x_base,
  input  logic               rd_bank,
  output logic               rd_bit,
  input  logic               wr_en,
  input  logic               wr_bank,
  input  logic [AW-1:0]      wr_addr,
  input  logic [WORD-1:0]    wr_data
);
  localparam int unsigned LW = $clog2(NBITS) + 1;
  localparam int unsigned SW = $clog2(WORD);

  logic [WORD-1:0] mem [2*(2**AW)];       // bank is the top address bit
  logic [LW-1:0]   lin;
  logic [SW-1:0]   sel_q;
  logic [WORD-1:0] word_q;

  always_comb
    lin = (LW'(coord.x - x_base) * LW'(GY) + LW'(coord.y)) * LW'(GZ) + LW'(coord.z);

  always_ff @(posedge clk) begin
    if (wr_en) mem[{wr_bank, wr_addr}] <= wr_data;
    if (rd_en) begin
      word_q <= mem[{rd_bank, AW'(lin >> SW)}];
      sel_q  <= lin[SW-1:0];
    end
  end

  assign rd_bit = word_q[sel_q];
endmodule
