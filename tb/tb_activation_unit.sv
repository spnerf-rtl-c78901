// tb_activation_unit: random rows through the unit with ReLU on and off;
// checks max(x, 0) (negative values and -0 become +0) or identity, the row
// number and the one-cycle latency.
module tb_activation_unit;
  import spnerf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic relu, in_valid, out_valid;
  logic [6:0] in_row, out_row;
  fp16_t in_data [BATCH];
  fp16_t out_data [BATCH];
  fp16_t exp_d [BATCH];
  int checks = 0, failures = 0;

  activation_unit dut (.*);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    relu = 0; in_valid = 0; in_row = 0;
    for (int i = 0; i < BATCH; i++) in_data[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      relu = 1'($urandom); in_valid = 1; in_row = 7'($urandom);
      for (int i = 0; i < BATCH; i++) begin
        in_data[i] = (i == 5) ? 16'h8000 : 16'($urandom);
        exp_d[i]   = (relu && in_data[i][15]) ? 16'h0000 : in_data[i];
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || out_row !== in_row) failures++;
      for (int i = 0; i < BATCH; i++) begin
        checks++;
        if (out_data[i] !== exp_d[i]) begin
          failures++;
          if (failures < 10) $display("MISMATCH lane %0d relu %b: %h expected %h", i, relu, out_data[i], exp_d[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
