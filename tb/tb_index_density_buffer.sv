// tb_index_density_buffer: fills both banks with random entries, then reads
// random addresses of random banks and checks data and one-cycle latency.
module tb_index_density_buffer;
  import spnerf_pkg::*;
  localparam int D = 512;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rd_en, rd_bank, wr_en, wr_bank;
  logic [8:0] rd_addr, wr_addr;
  hentry_t rd_data, wr_data;
  hentry_t model [2][D];
  int checks = 0, failures = 0;

  index_density_buffer #(.DEPTH(D)) dut (.*);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rd_en = 0; wr_en = 0; rd_bank = 0; wr_bank = 0; rd_addr = 0; wr_addr = 0; wr_data = '0;
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < D; a++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = 1'(b); wr_addr = 9'(a);
        wr_data = '{index: 18'($urandom), density: 16'($urandom)};
        model[b][a] = wr_data;
      end
    @(negedge clk) wr_en = 0;
    for (int i = 0; i < 2000; i++) begin
      automatic int b = $urandom % 2, a = $urandom % D;
      @(negedge clk);
      rd_en = 1; rd_bank = 1'(b); rd_addr = 9'(a);
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_data !== model[b][a]) begin
        failures++;
        if (failures < 10) $display("MISMATCH bank %0d addr %0d: %h expected %h", b, a, rd_data, model[b][a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
