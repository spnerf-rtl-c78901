// sa_pe: one processing element of the output-stationary systolic array.
// Each cycle with v_in set it multiplies the input element a_in (from the
// left) by the weight b_in (from above) in FP16 and adds the product into
// its FP16 accumulator (multiply and add each rounded to nearest even).
// a, b and the valid bit are passed on to the right/lower neighbours one
// cycle later. clear zeroes the accumulator (start of an output tile).
module sa_pe
  import spnerf_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  logic  v_in,
  input  fp16_t a_in,
  input  fp16_t b_in,
  output logic  v_out,
  output fp16_t a_out,
  output fp16_t b_out,
  output fp16_t acc
);
  fp16_t prod, sum;
  fp16_mul u_mul (.a(a_in), .b(b_in), .y(prod));
  fp16_add u_add (.a(acc),  .b(prod), .y(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_out <= 1'b0; a_out <= FP16_ZERO; b_out <= FP16_ZERO; acc <= FP16_ZERO;
    end else begin
      v_out <= v_in;
      a_out <= a_in;
      b_out <= b_in;
      if (clear)     acc <= FP16_ZERO;
      else if (v_in) acc <= sum;
    end
  end
endmodule
