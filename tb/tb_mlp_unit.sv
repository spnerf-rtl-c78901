// tb_mlp_unit: self-checking test of the complete MLP unit (input buffer,
// weight buffer, systolic array, output buffer, activation unit and
// controller) with a 64 x 16 array (the batch of 64 is fixed, the column
// count is reduced to keep the simulation short; the full 64 x 64 size is
// covered by the top-level full-size test). Two batches of 64 random
// 40-element vectors are run through 40 -> 128 -> 128 -> 3 with random
// weights, the first with weight half 0 and the second with half 1. The
// three result channels of every vector are compared bit-exactly with a
// reference that accumulates in input order with FP16 rounding and applies
// ReLU to the hidden layers. The batch latency is checked against the
// controller formula 1 + sum(tiles*(K+R+C) + 2N + 2) plus two cycles:
// the input buffer turns the commit into a full half one cycle later and
// the controller leaves IDLE on the next edge (measured from the commit
// edge to busy falling).
module tb_mlp_unit;
  import spnerf_pkg::*;
  import fp16_ref_pkg::*;
  localparam int C = 16, R = 64, VL = 40;
  localparam int WD = layer_base(3, C);
  logic clk = 0, rst_n = 0;
  logic fill_ready, vec_valid = 0, fill_commit = 0, wb_we = 0, wb_half = 0, w_half = 0;
  logic res_valid, busy;
  logic [5:0] vec_idx = 0;
  logic [6:0] fill_count = 0, res_count;
  logic [$clog2(WD)-1:0] wb_addr = 0;
  logic [1:0] res_ch;
  logic [31:0] cnt_batches;
  fp16_t vec_data [VL], wb_data [C], res_data [R];
  fp16_t X [R][128], H [R][128], W [2][3][128][128], E [R][3];
  int checks = 0, failures = 0, nres;

  mlp_unit #(.C(C)) dut (.*);
  always #5 clk = ~clk;
  initial begin #50000000; $display("TIMEOUT"); $finish; end

  task automatic chk(logic c, string s);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  function automatic fp16_t relu(fp16_t x);
    return x[15] ? 16'h0000 : x;
  endfunction

  task automatic ref_mlp(int h);
    fp16_t s;
    for (int v = 0; v < R; v++) begin
      for (int l = 0; l < 3; l++) begin
        fp16_t nxt [128];
        for (int n = 0; n < layer_n(l); n++) begin
          s = 16'h0000;
          for (int k = 0; k < layer_k(l); k++) s = fadd(s, fmul(X[v][k], W[h][l][k][n]));
          nxt[n] = (l < 2) ? relu(s) : s;
        end
        for (int n = 0; n < layer_n(l); n++) X[v][n] = nxt[n];
      end
      for (int n = 0; n < 3; n++) E[v][n] = X[v][n];
    end
  endtask

  task automatic load_weights(int h);
    for (int l = 0; l < 3; l++) begin
      for (int k = 0; k < 128; k++) for (int n = 0; n < 128; n++)
        W[h][l][k][n] = (k < layer_k(l) && n < layer_n(l)) ? rnd(9, 13) : 16'h0000;
      for (int t = 0; t < layer_tiles(l, C); t++)
        for (int k = 0; k < layer_k(l); k++) begin
          for (int c = 0; c < C; c++) wb_data[c] = (t * C + c < 128) ? W[h][l][k][t * C + c] : 16'h0000;
          wb_addr = $bits(wb_addr)'(layer_base(l, C) + t * layer_k(l) + k);
          wb_half = 1'(h); wb_we = 1;
          @(negedge clk);
        end
    end
    wb_we = 0;
  endtask

  task automatic run_batch(int h);
    int t0, lat, exp_lat;
    for (int v = 0; v < R; v++) begin
      for (int e = 0; e < VL; e++) begin
        X[v][e] = (e == VL - 1) ? 16'h0000 : rnd(11, 15);
        vec_data[e] = X[v][e];
      end
      vec_idx = 6'(v); vec_valid = 1;
      @(negedge clk); vec_valid = 0;
      repeat (4) @(negedge clk);
    end
    ref_mlp(h);
    w_half = 1'(h);
    fill_count = 7'd64; fill_commit = 1;
    @(negedge clk); fill_commit = 0;
    t0 = $time / 10;
    nres = 0;
    while (nres < 3) begin
      if (res_valid) begin
        chk(res_count == 64, "result count");
        for (int v = 0; v < R; v++)
          chk(res_data[v] === E[v][res_ch], $sformatf("batch half %0d vec %0d ch %0d got %h exp %h", h, v, res_ch, res_data[v], E[v][res_ch]));
        nres++;
      end
      @(negedge clk);
    end
    while (busy) @(negedge clk);
    lat = $time / 10 - t0;
    exp_lat = 1;
    for (int l = 0; l < 3; l++) exp_lat += layer_tiles(l, C) * (layer_k(l) + R + C) + 2 * layer_n(l) + 2;
    chk(lat == exp_lat + 2, $sformatf("batch latency %0d, controller formula %0d + 2", lat, exp_lat));
  endtask

  initial begin
    for (int e = 0; e < VL; e++) vec_data[e] = 0;
    for (int c = 0; c < C; c++) wb_data[c] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    load_weights(0);
    load_weights(1);
    run_batch(0);
    run_batch(1);
    chk(cnt_batches == 2, "two batches counted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
