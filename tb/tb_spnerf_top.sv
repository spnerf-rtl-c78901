// tb_spnerf_top: end-to-end test of the accelerator with a reduced
// geometry so that it runs quickly: a 64 x 16 systolic array, a 1024-entry
// hash table and a 256-row true grid per bank, subgrids 4 voxels wide and
// 16 x 16 in y and z. Codebook size, MLP shape, batch size and the FP16
// datapath are the paper's. The scenario and all checks are in
// spnerf_top_tb_body.svh (shared with the full-size test).
module tb_spnerf_top;
  import spnerf_pkg::*;
  localparam int P_COLS = 16, P_HT = 1024, P_TGD = 256, P_SGW = 4, P_GY = 16, P_GZ = 16;
  `include "spnerf_top_tb_body.svh"
  spnerf_top #(.SA_COLS(P_COLS), .HT(P_HT), .CBD(CB_ENTRIES), .TGD(P_TGD), .SGW(P_SGW), .GY(P_GY), .GZ(P_GZ)) dut (.*);
  initial begin #200000000; $display("TIMEOUT"); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
