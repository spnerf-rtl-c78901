// tb_true_grid_buffer: random INT8 vectors in both banks, random reads,
// checks every lane and the bank separation.
module tb_true_grid_buffer;
  import spnerf_pkg::*;
  localparam int D = 256;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rd_en, rd_bank, wr_en, wr_bank;
  logic [7:0] rd_addr, wr_addr;
  logic [7:0] rd_data [N_FEAT];
  logic [7:0] wr_data [N_FEAT];
  logic [7:0] model [2][D][N_FEAT];
  int checks = 0, failures = 0;

  true_grid_buffer #(.DEPTH(D)) dut (.*);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rd_en = 0; wr_en = 0; rd_bank = 0; wr_bank = 0; rd_addr = 0; wr_addr = 0;
    for (int i = 0; i < N_FEAT; i++) wr_data[i] = '0;
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < D; a++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = 1'(b); wr_addr = 8'(a);
        for (int i = 0; i < N_FEAT; i++) begin wr_data[i] = 8'($urandom); model[b][a][i] = wr_data[i]; end
      end
    @(negedge clk) wr_en = 0;
    for (int n = 0; n < 2000; n++) begin
      automatic int b = $urandom % 2, a = $urandom % D;
      @(negedge clk); rd_en = 1; rd_bank = 1'(b); rd_addr = 8'(a);
      @(negedge clk); rd_en = 0;
      for (int i = 0; i < N_FEAT; i++) begin
        checks++;
        if (rd_data[i] !== model[b][a][i]) begin
          failures++;
          if (failures < 10) $display("MISMATCH bank %0d addr %0d lane %0d", b, a, i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
