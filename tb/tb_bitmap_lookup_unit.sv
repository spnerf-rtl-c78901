// tb_bitmap_lookup_unit: a small subgrid geometry (2 x 8 x 8 bits per bank),
// random bit masks in both banks; random vertices of two subgrids are
// looked up and compared with the bit at ((x - x_base)*GY + y)*GZ + z.
module tb_bitmap_lookup_unit;
  import spnerf_pkg::*;
  localparam int GW = 2, GY = 8, GZ = 8, WORD = 32, NBITS = GW * GY * GZ, DEPTH = NBITS / WORD;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rd_en, rd_bank, rd_bit, wr_en, wr_bank;
  vcoord_t coord;
  logic [7:0] x_base;
  logic [1:0] wr_addr;
  logic [31:0] wr_data;
  logic model [2][NBITS];
  int checks = 0, failures = 0;

  bitmap_lookup_unit #(.GW(GW), .GY(GY), .GZ(GZ), .WORD(WORD)) dut (.*);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rd_en = 0; wr_en = 0; rd_bank = 0; wr_bank = 0; coord = '0; x_base = 0; wr_addr = 0; wr_data = 0;
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = 1'(b); wr_addr = 2'(a); wr_data = $urandom;
        for (int i = 0; i < WORD; i++) model[b][a * WORD + i] = wr_data[i];
      end
    @(negedge clk) wr_en = 0;
    for (int n = 0; n < 3000; n++) begin
      automatic int k = 10 + $urandom % 2;                 // subgrid 10 or 11
      automatic int xl = $urandom % GW, y = $urandom % GY, z = $urandom % GZ;
      @(negedge clk);
      rd_en = 1; rd_bank = 1'(k); x_base = 8'(k * GW);
      coord = '{x: 8'(k * GW + xl), y: 8'(y), z: 8'(z)};
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_bit !== model[k % 2][(xl * GY + y) * GZ + z]) begin
        failures++;
        if (failures < 10) $display("MISMATCH subgrid %0d (%0d,%0d,%0d)", k, xl, y, z);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
