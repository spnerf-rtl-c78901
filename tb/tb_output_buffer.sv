// tb_output_buffer: writes 128 random rows of 64 FP16 values, reads them
// back in random order, checks data and one-cycle read latency.
module tb_output_buffer;
  import spnerf_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en, rd_en;
  logic [6:0] wr_row, rd_row;
  fp16_t wr_data [BATCH];
  fp16_t rd_data [BATCH];
  fp16_t model [HID][BATCH];
  int checks = 0, failures = 0;

  output_buffer dut (.*);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_row = 0; rd_row = 0;
    for (int i = 0; i < BATCH; i++) wr_data[i] = '0;
    for (int r = 0; r < HID; r++) begin
      @(negedge clk);
      wr_en = 1; wr_row = 7'(r);
      for (int i = 0; i < BATCH; i++) begin wr_data[i] = 16'($urandom); model[r][i] = wr_data[i]; end
    end
    @(negedge clk) wr_en = 0;
    for (int n = 0; n < 500; n++) begin
      automatic int r = $urandom % HID;
      @(negedge clk); rd_en = 1; rd_row = 7'(r);
      @(negedge clk); rd_en = 0;
      for (int i = 0; i < BATCH; i++) begin
        checks++;
        if (rd_data[i] !== model[r][i]) begin
          failures++;
          if (failures < 10) $display("MISMATCH row %0d lane %0d", r, i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
