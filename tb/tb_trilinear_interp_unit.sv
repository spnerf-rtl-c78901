// tb_trilinear_interp_unit: random points of eight vertices, each vertex
// either a codebook vector (FP16 lanes) or a true-grid vector (INT8 lanes)
// with a random scale; checks sum_i w_i * (s * C_i) and the interpolated
// density lane by lane against the real-valued FP16 reference, and that the
// result appears two cycles after the eighth vertex.
module tb_trilinear_interp_unit;
  import spnerf_pkg::*;
  import fp16_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  fp16_t scale;
  logic in_valid, in_from_tg, out_valid;
  fp16_t in_feat [N_FEAT];
  fp16_t in_density, out_density;
  vside_t in_side;
  logic [5:0] out_tag;
  fp16_t out_feat [N_FEAT];
  int checks = 0, failures = 0;

  trilinear_interp_unit dut (.*);

  fp16_t ef [N_FEAT];
  fp16_t ed;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; in_from_tg = 0; in_density = 0; in_side = '0; scale = 16'h2000;
    for (int i = 0; i < N_FEAT; i++) in_feat[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 400; p++) begin
      scale = rnd(8, 14);
      for (int i = 0; i < N_FEAT; i++) ef[i] = 16'h0000;
      ed = 16'h0000;
      for (int v = 0; v < 8; v++) begin
        @(negedge clk);
        in_valid   = 1;
        in_from_tg = 1'($urandom);
        in_side    = '{weight: rnd(8, 14), tag: 6'(p), last: (v == 7)};
        in_density = rnd(10, 18);
        for (int i = 0; i < N_FEAT; i++) begin
          fp16_t c;
          if (in_from_tg) begin
            in_feat[i] = {8'h00, 8'($urandom)};
            c = fmul(scale, r2f(real'($signed(in_feat[i][7:0]))));
          end else begin
            in_feat[i] = rnd(10, 18);
            c = in_feat[i];
          end
          ef[i] = fadd(ef[i], fmul(in_side.weight, c));
        end
        ed = fadd(ed, fmul(in_side.weight, in_density));
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (out_valid) begin failures++; $display("result one cycle early"); end
      @(negedge clk);
      checks++;
      if (!out_valid || out_tag !== 6'(p)) begin failures++; $display("no result at +2 for point %0d", p); end
      for (int i = 0; i < N_FEAT; i++) begin
        checks++;
        if (out_feat[i] !== ef[i]) begin
          failures++;
          if (failures < 10) $display("MISMATCH point %0d lane %0d: %h expected %h", p, i, out_feat[i], ef[i]);
        end
      end
      checks++;
      if (out_density !== ed) begin failures++; $display("density %h expected %h", out_density, ed); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
