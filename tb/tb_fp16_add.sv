// tb_fp16_add: random and directed sums of fp16_add against the real-valued
// reference in fp16_ref_pkg: close exponents (cancellation), far exponents
// (sticky bit), ties, overflow and flush-to-zero.
module tb_fp16_add;
  import fp16_ref_pkg::*;
  logic [15:0] a, b, y;
  int checks = 0, failures = 0;
  fp16_add dut (.a(a), .b(b), .y(y));

  task automatic chk(logic [15:0] ta, logic [15:0] tb_);
    logic [15:0] ref_y;
    a = ta; b = tb_; #1;
    ref_y = fadd(ta, tb_);
    checks++;
    if (y !== ref_y) begin
      failures++;
      if (failures < 10) $display("MISMATCH %h + %h = %h, expected %h", ta, tb_, y, ref_y);
    end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    chk(16'h3C00, 16'h3C00);
    chk(16'h3C00, 16'hBC00);   // exact cancel
    chk(16'h3C00, 16'h1000);   // far operand
    chk(16'h7BFF, 16'h7BFF);   // overflow
    chk(16'h0500, 16'h8400);   // underflow
    chk(16'h4248, 16'hC247);
    for (int i = 0; i < 20000; i++) chk(rnd(1, 30), rnd(1, 30));
    for (int i = 0; i < 20000; i++) begin
      automatic logic [15:0] x = rnd(10, 20);
      automatic logic [15:0] z = rnd(10, 20);
      z[14:10] = x[14:10] - 5'($urandom % 3);
      chk(x, z);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
