// output_buffer: holds one layer's outputs for the whole batch, one row per
// output channel (HID = 128 rows) with one FP16 value per batch vector
// (64). Rows are written as the systolic array's columns are drained and
// read back row by row into the activation unit. One bank, as drawn in the
// paper's architecture figure. Synchronous read, one cycle latency.
module output_buffer
  import spnerf_pkg::*;
#(
  parameter int unsigned ROWS = HID,
  parameter int unsigned NV   = BATCH,
  localparam int unsigned AW = $clog2(ROWS)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_row,
  input  fp16_t         wr_data [NV],
  input  logic          rd_en,
  input  logic [AW-1:0] rd_row,
  output fp16_t         rd_data [NV]
);
  logic [NV*16-1:0] mem [ROWS];
  logic [NV*16-1:0] q, wd;
  always_comb
    for (int i = 0; i < NV; i++) wd[i*16 +: 16] = wr_data[i];
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row] <= wd;
    if (rd_en) q <= mem[rd_row];
  end
  always_comb
    for (int i = 0; i < NV; i++) rd_data[i] = q[i*16 +: 16];
endmodule
