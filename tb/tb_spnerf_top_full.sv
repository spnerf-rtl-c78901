// tb_spnerf_top_full: the end-to-end test of spnerf_top at the design's
// full size, with no parameter override: 64 x 64 systolic array, 32768-entry
// hash table per bank, 4096-entry codebook, 8192-row true grid per bank,
// 64 subgrids of 3 x 160 x 160 voxels. Scenario and checks are those of
// spnerf_top_tb_body.svh.
module tb_spnerf_top_full;
  import spnerf_pkg::*;
  localparam int P_COLS = 64, P_HT = HASH_T, P_TGD = TG_DEPTH, P_SGW = SUBGRID_W, P_GY = GRID_DIM, P_GZ = GRID_DIM;
  `include "spnerf_top_tb_body.svh"
  spnerf_top dut (.*);
  initial begin #900000000; $display("TIMEOUT"); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
