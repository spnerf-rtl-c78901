// tb_systolic_array: self-checking test of the output-stationary systolic
// array with a reduced 8 x 4 size. Random FP16 operand matrices A (R x K)
// and B (K x C) are streamed in, one k per cycle, and every accumulator is
// compared with a reference that forms sum_k A[r][k]*B[k][c] in the same
// order with FP16 rounding after each multiply and add. Timing check: the
// last accumulator (R-1, C-1) must be final exactly K+R+C-2 cycles after
// the first input edge and not one cycle earlier. A second pass checks that
// clear really restarts the accumulation.
module tb_systolic_array;
  import spnerf_pkg::*;
  import fp16_ref_pkg::*;
  localparam int R = 8, C = 4, K = 12;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  fp16_t a_in [R], b_in [C], rd_data [R];
  logic [1:0] rd_col;
  int checks = 0, failures = 0;
  fp16_t A [R][K], B [K][C], E [R][C];

  systolic_array #(.R(R), .C(C)) dut (.*);
  always #5 clk = ~clk;
  initial begin #2000000; $display("TIMEOUT"); $finish; end

  task automatic run_pass();
    for (int r = 0; r < R; r++) for (int k = 0; k < K; k++) A[r][k] = rnd(12, 16);
    for (int k = 0; k < K; k++) for (int c = 0; c < C; c++) B[k][c] = rnd(12, 16);
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      E[r][c] = 16'h0000;
      for (int k = 0; k < K; k++) E[r][c] = fadd(E[r][c], fmul(A[r][k], B[k][c]));
    end
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    for (int k = 0; k < K; k++) begin
      in_valid = 1;
      for (int r = 0; r < R; r++) a_in[r] = A[r][k];
      for (int c = 0; c < C; c++) b_in[c] = B[k][c];
      @(negedge clk);
    end
    in_valid = 0;
    // first input edge was K negedges ago; wait until K+R+C-3 edges passed
    repeat (R + C - 3) @(negedge clk);
    rd_col = 2'(C - 1); #1;
    checks++;
    if (rd_data[R-1] == E[R-1][C-1]) begin failures++; $display("FAIL early final"); end
    @(negedge clk);
    for (int c = 0; c < C; c++) begin
      rd_col = 2'(c); #1;
      for (int r = 0; r < R; r++) begin
        checks++;
        if (rd_data[r] !== E[r][c]) begin
          failures++; $display("FAIL r%0d c%0d got %h exp %h", r, c, rd_data[r], E[r][c]);
        end
      end
    end
  endtask

  initial begin
    rd_col = 0;
    for (int r = 0; r < R; r++) a_in[r] = 0;
    for (int c = 0; c < C; c++) b_in[c] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int p = 0; p < 200; p++) run_pass();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
