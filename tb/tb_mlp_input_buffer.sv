// tb_mlp_input_buffer: self-checking test of the block-circulant MLP input
// buffer. It fills a half with 64 random 40-element vectors (one vec_valid
// pulse per vector, vec_busy must stay high for exactly 4 cycles = one
// element per block per cycle), commits it and reads every row back: lane v
// of row r must be element r of vector v. A few storage locations are
// peeked directly to confirm the layout of Fig. 6 (element e of vector v in
// bank (v/4 + e/4) mod 16, lane v mod 4, row e). Row writes (hidden-layer
// write-back) are checked the same way. The ping-pong protocol is checked
// by filling the second half while the first is still held, observing
// fill_ready drop when both halves are full, and the counts per half.
module tb_mlp_input_buffer;
  import spnerf_pkg::*;
  import fp16_ref_pkg::*;
  localparam int NV = 64, VL = 40;
  logic clk = 0, rst_n = 0;
  logic fill_ready, vec_valid = 0, vec_busy, fill_commit = 0, batch_avail, batch_release = 0;
  logic row_we = 0, rd_en = 0;
  logic [5:0] vec_idx = 0;
  logic [6:0] fill_count = 0, batch_count;
  logic [6:0] row_row = 0, rd_row = 0;
  fp16_t vec_data [VL], row_data [NV], rd_data [NV];
  fp16_t M [2][NV][128];
  int checks = 0, failures = 0;

  mlp_input_buffer dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; $display("TIMEOUT"); $finish; end

  task automatic chk(logic c, string s);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic fill(int h, int cnt);
    int busy;
    for (int v = 0; v < NV; v++) begin
      for (int e = 0; e < VL; e++) begin
        M[h][v][e] = (e == VL - 1) ? 16'h0000 : rnd(10, 20);
        vec_data[e] = M[h][v][e];
      end
      vec_idx = 6'(v); vec_valid = 1;
      @(negedge clk); vec_valid = 0;
      busy = 0;
      while (vec_busy) begin busy++; @(negedge clk); end
      chk(busy == 4, $sformatf("vector write took %0d cycles", busy));
    end
    fill_count = 7'(cnt); fill_commit = 1;
    @(negedge clk); fill_commit = 0;
    chk(!fill_ready, "producer blocked while the commit is pending");
    @(negedge clk);
  endtask

  task automatic check_rows(int h, int nrows);
    for (int r = 0; r < nrows; r++) begin
      rd_row = 7'(r); rd_en = 1;
      @(negedge clk); rd_en = 0;
      for (int v = 0; v < NV; v++)
        chk(rd_data[v] === M[h][v][r], $sformatf("half %0d row %0d vec %0d got %h exp %h", h, r, v, rd_data[v], M[h][v][r]));
    end
  endtask

  initial begin
    for (int e = 0; e < VL; e++) vec_data[e] = 0;
    for (int v = 0; v < NV; v++) row_data[v] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);
    chk(fill_ready && !batch_avail, "reset state");
    fill(0, 64);
    chk(batch_avail && batch_count == 64, "half 0 committed");
    // layout peeks (half 0 is the low address half)
    chk(dut.g_bank[4].g_lane[1].mem[13] === M[0][5][13], "layout v5 e13 -> bank 4 lane 1");
    chk(dut.g_bank[8].g_lane[3].mem[39] === M[0][63][39], "layout v63 e39 -> bank 8 lane 3");
    chk(dut.g_bank[0].g_lane[0].mem[0] === M[0][0][0], "layout v0 e0 -> bank 0 lane 0");
    chk(dut.g_bank[11].g_lane[2].mem[9] === M[0][38][9], "layout v38 e9 -> bank 11 lane 2");
    check_rows(0, VL);
    // fill the other half while half 0 is still held by the consumer
    chk(fill_ready, "second half free");
    fill(1, 37);
    chk(!fill_ready, "both halves full: producer stalled");
    check_rows(0, 8);                                  // consumer still on half 0
    // hidden-layer write-back into the consumer half, rows 0..127
    for (int r = 0; r < 128; r++) begin
      for (int v = 0; v < NV; v++) begin M[0][v][r] = rnd(5, 25); row_data[v] = M[0][v][r]; end
      row_row = 7'(r); row_we = 1;
      @(negedge clk); row_we = 0;
    end
    check_rows(0, 128);
    batch_release = 1; @(negedge clk); batch_release = 0;
    chk(batch_avail && batch_count == 37, "half 1 becomes the consumer half");
    chk(fill_ready, "producer released after release");
    check_rows(1, VL);
    batch_release = 1; @(negedge clk); batch_release = 0;
    chk(!batch_avail, "both halves empty");
    fill(0, 64);
    check_rows(0, VL);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
