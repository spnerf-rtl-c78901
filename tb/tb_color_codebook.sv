// tb_color_codebook: writes random 12-lane FP16 vectors to every entry of a
// 4096-entry codebook and reads random entries back (one-cycle latency).
module tb_color_codebook;
  import spnerf_pkg::*;
  localparam int D = 4096;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rd_en, wr_en;
  logic [11:0] rd_addr, wr_addr;
  fp16_t rd_data [N_FEAT];
  fp16_t wr_data [N_FEAT];
  fp16_t model [D][N_FEAT];
  int checks = 0, failures = 0;

  color_codebook #(.DEPTH(D)) dut (.*);

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rd_en = 0; wr_en = 0; rd_addr = 0; wr_addr = 0;
    for (int i = 0; i < N_FEAT; i++) wr_data[i] = '0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 12'(a);
      for (int i = 0; i < N_FEAT; i++) begin wr_data[i] = 16'($urandom); model[a][i] = wr_data[i]; end
    end
    @(negedge clk) wr_en = 0;
    for (int n = 0; n < 2000; n++) begin
      automatic int a = $urandom % D;
      @(negedge clk); rd_en = 1; rd_addr = 12'(a);
      @(negedge clk); rd_en = 0;
      for (int i = 0; i < N_FEAT; i++) begin
        checks++;
        if (rd_data[i] !== model[a][i]) begin
          failures++;
          if (failures < 10) $display("MISMATCH addr %0d lane %0d: %h expected %h", a, i, rd_data[i], model[a][i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
