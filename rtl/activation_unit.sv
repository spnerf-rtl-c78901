// activation_unit: applies the layer's activation to one output row (one
// channel for all batch vectors) on its way from the output buffer back to
// the input buffer. ReLU for the two hidden layers; the paper names the
// unit but not its function, so ReLU (hidden) and identity (output layer,
// leaving the final colour non-linearity to the rendering step) are this
// design's choice. ReLU maps every value with the sign bit set, including
// -0, to +0. Registered: out_* one cycle after in_*.
module activation_unit
  import spnerf_pkg::*;
#(
  parameter int unsigned NV = BATCH,
  parameter int unsigned RW = $clog2(HID)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          relu,
  input  logic          in_valid,
  input  logic [RW-1:0] in_row,
  input  fp16_t         in_data [NV],
  output logic          out_valid,
  output logic [RW-1:0] out_row,
  output fp16_t         out_data [NV]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_row <= '0;
      for (int i = 0; i < NV; i++) out_data[i] <= FP16_ZERO;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_row <= in_row;
        for (int i = 0; i < NV; i++)
          out_data[i] <= (relu && in_data[i][15]) ? FP16_ZERO : in_data[i];
      end
    end
  end
endmodule
