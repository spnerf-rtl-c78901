// tb_weight_buffer: loads random rows into both halves of a 16-column
// weight buffer and reads random rows back with one cycle latency.
module tb_weight_buffer;
  import spnerf_pkg::*;
  localparam int C = 16, D = layer_base(3, C), AW = $clog2(D);
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en, wr_half, rd_en, rd_half;
  logic [AW-1:0] wr_addr, rd_addr;
  fp16_t wr_data [C];
  fp16_t rd_data [C];
  fp16_t model [2][D][C];
  int checks = 0, failures = 0;

  weight_buffer #(.C(C)) dut (.*);

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    // 40*8 + 128*8 + 128*1 rows for 16 columns
    checks++;
    if (D != 40 * 8 + 128 * 8 + 128) begin failures++; $display("DEPTH %0d", D); end
    wr_en = 0; rd_en = 0; wr_half = 0; rd_half = 0; wr_addr = 0; rd_addr = 0;
    for (int j = 0; j < C; j++) wr_data[j] = '0;
    for (int h = 0; h < 2; h++)
      for (int a = 0; a < D; a++) begin
        @(negedge clk);
        wr_en = 1; wr_half = 1'(h); wr_addr = AW'(a);
        for (int j = 0; j < C; j++) begin wr_data[j] = 16'($urandom); model[h][a][j] = wr_data[j]; end
      end
    @(negedge clk) wr_en = 0;
    for (int n = 0; n < 2000; n++) begin
      automatic int h = $urandom % 2, a = $urandom % D;
      @(negedge clk); rd_en = 1; rd_half = 1'(h); rd_addr = AW'(a);
      @(negedge clk); rd_en = 0;
      for (int j = 0; j < C; j++) begin
        checks++;
        if (rd_data[j] !== model[h][a][j]) begin
          failures++;
          if (failures < 10) $display("MISMATCH half %0d row %0d col %0d", h, a, j);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
