// color_codebook: the vector-quantisation codebook, CB_ENTRIES (4096) color
// feature vectors of N_FEAT (12) FP16 values each. It serves every unified
// index below 4096. Shared by all subgrids, so it has one bank only (it is
// drawn without a second copy in the paper's architecture figure).
// Interface and timing: synchronous read, rd_data one cycle after rd_en;
// one write port for the memory controller.
module color_codebook
  import spnerf_pkg::*;
#(
  parameter int unsigned DEPTH = CB_ENTRIES,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output fp16_t         rd_data [N_FEAT],
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  fp16_t         wr_data [N_FEAT]
);
  logic [N_FEAT*16-1:0] mem [DEPTH];
  logic [N_FEAT*16-1:0] q;
  logic [N_FEAT*16-1:0] wd;
  always_comb
    for (int i = 0; i < N_FEAT; i++) wd[i*16 +: 16] = wr_data[i];
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wd;
    if (rd_en) q <= mem[rd_addr];
  end
  always_comb
    for (int i = 0; i < N_FEAT; i++) rd_data[i] = q[i*16 +: 16];
endmodule
