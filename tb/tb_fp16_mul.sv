// tb_fp16_mul: random and directed products of fp16_mul against the real-
// valued reference in fp16_ref_pkg (including rounding ties, overflow and
// flush-to-zero cases).
module tb_fp16_mul;
  import fp16_ref_pkg::*;
  logic [15:0] a, b, y;
  int checks = 0, failures = 0;
  fp16_mul dut (.a(a), .b(b), .y(y));

  task automatic chk(logic [15:0] ta, logic [15:0] tb_);
    logic [15:0] ref_y;
    a = ta; b = tb_; #1;
    ref_y = fmul(ta, tb_);
    checks++;
    if (y !== ref_y) begin
      failures++;
      if (failures < 10) $display("MISMATCH %h * %h = %h, expected %h", ta, tb_, y, ref_y);
    end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    chk(16'h3C00, 16'h3C00);   // 1*1
    chk(16'h4000, 16'hC200);   // 2*-3
    chk(16'h3C01, 16'h3BFF);   // rounding
    chk(16'h7800, 16'h7800);   // overflow
    chk(16'h0400, 16'h3800);   // underflow -> 0
    chk(16'h0000, 16'h4500);   // zero
    for (int i = 0; i < 20000; i++) chk(rnd(1, 30), rnd(1, 30));
    for (int i = 0; i < 5000; i++)  chk(rnd(10, 20), rnd(10, 20));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
