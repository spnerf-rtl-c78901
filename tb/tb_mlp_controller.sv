// tb_mlp_controller: self-checking test of the MLP schedule at the full
// 64 x 64 array size. For one batch it checks
//  * the cycle count: 1 + sum over layers of (tiles*(K+R+C) + 2N + 2),
//  * that the weight-buffer addresses run 0,1,2,... without gaps over the
//    whole batch (the weight layout is tile-major per layer),
//  * the input-buffer rows 0..K-1 of every tile, the number of clears,
//    drains (one per output channel) and activation rows per layer,
//  * ReLU on the hidden layers and identity on the last one,
//  * that no array input is issued during FLUSH/DRAIN, and one release.
module tb_mlp_controller;
  import spnerf_pkg::*;
  localparam int R = 64, C = 64;
  logic clk = 0, rst_n = 0, batch_avail = 0;
  logic batch_release, ib_rd_en, wb_rd_en, sa_clear, sa_in_valid, ob_wr_en, ob_rd_en;
  logic act_in_valid, act_relu, last_layer, busy;
  logic [6:0] ib_rd_row, ob_wr_row, ob_rd_row, act_in_row;
  logic [$clog2(layer_base(3, C))-1:0] wb_rd_addr;
  logic [5:0] sa_rd_col;
  int checks = 0, failures = 0;

  mlp_controller #(.R(R), .C(C)) dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; $display("TIMEOUT"); $finish; end

  task automatic chk(logic c, string s);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  int cyc, exp_cyc, waddr, clears, drains, acts, releases, feeds, kk;
  int exp_clears, exp_drains, exp_feeds;
  initial begin
    exp_cyc = 1; exp_clears = 0; exp_drains = 0; exp_feeds = 0;
    for (int l = 0; l < 3; l++) begin
      exp_cyc    += layer_tiles(l, C) * (layer_k(l) + R + C) + 2 * layer_n(l) + 2;
      exp_clears += layer_tiles(l, C);
      exp_drains += layer_n(l);
      exp_feeds  += layer_tiles(l, C) * layer_k(l);
    end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int b = 0; b < 2; b++) begin
      batch_avail = 1;
      cyc = 0; waddr = 0; clears = 0; drains = 0; acts = 0; releases = 0; feeds = 0; kk = 0;
      @(negedge clk);
      while (!batch_release) begin
        cyc++;
        if (sa_clear) begin clears++; kk = 0; end
        if (wb_rd_en) begin
          feeds++;
          chk(int'(wb_rd_addr) == waddr, $sformatf("weight address %0d exp %0d", wb_rd_addr, waddr));
          chk(ib_rd_en && int'(ib_rd_row) == kk, "input row follows k");
          waddr++; kk++;
        end
        if (ob_wr_en) drains++;
        if (act_in_valid) begin
          acts++;
          chk(act_relu == !last_layer, "ReLU on hidden layers only");
        end
        if (ob_wr_en || ob_rd_en) chk(!wb_rd_en, "no feed during drain/activation");
        @(negedge clk);
      end
      cyc++;
      batch_avail = 0;
      chk(cyc == exp_cyc, $sformatf("batch took %0d cycles, expected %0d", cyc, exp_cyc));
      chk(clears == exp_clears, $sformatf("clears %0d exp %0d", clears, exp_clears));
      chk(drains == exp_drains, $sformatf("drains %0d exp %0d", drains, exp_drains));
      chk(feeds == exp_feeds && waddr == layer_base(3, C), "feeds / weight depth");
      @(negedge clk);
      chk(!busy && !batch_release, "idle after release");
      chk(acts >= exp_drains - 1, $sformatf("activation rows %0d", acts));
      repeat (5) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
