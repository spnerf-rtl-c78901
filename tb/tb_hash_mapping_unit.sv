// tb_hash_mapping_unit: a 256-entry hash table per bank, the full 4096-entry
// codebook and a 256-entry true-grid buffer per bank, all random. A random
// vertex stream (with idle cycles, subgrid hits and misses and random bitmap
// bits) is decoded; each output, three cycles after its vertex, is compared
// with an independent model: hash -> entry -> codebook if index < 4096,
// true grid at (index - 4096 - base) otherwise, zero if masked or missed.
module tb_hash_mapping_unit;
  import spnerf_pkg::*;
  localparam int HT = 256, CBD = 4096, TGD = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_bank, in_hit, mask_bit;
  vcoord_t in_coord;
  logic [17:0] in_tg_base;
  vside_t in_side, out_side;
  logic out_valid, out_from_tg, out_miss, out_masked, out_from_cb;
  fp16_t out_feat [N_FEAT];
  fp16_t out_density;
  logic ht_we, ht_bank, cb_we, tg_we, tg_bank;
  logic [7:0] ht_addr, tg_addr;
  logic [11:0] cb_addr;
  hentry_t ht_data;
  fp16_t cb_data [N_FEAT];
  logic [7:0] tg_data [N_FEAT];

  hash_mapping_unit #(.HT(HT), .CBD(CBD), .TGD(TGD)) dut (.*);

  hentry_t    mht [2][HT];
  fp16_t      mcb [CBD][N_FEAT];
  logic [7:0] mtg [2][TGD][N_FEAT];
  logic [17:0] base [2];

  typedef struct { logic v; vcoord_t c; logic bank, hit, mask; vside_t side; } vin_t;
  vin_t hist [int];
  int checks = 0, failures = 0, n_cb = 0, n_tg = 0, n_mask = 0, n_miss = 0;

  function automatic int href(vcoord_t c);
    longint unsigned h;
    h = (longint'(c.x)) ^ (longint'(c.y) * 64'd2654435761) ^ (longint'(c.z) * 64'd805459861);
    return int'(h % HT);
  endfunction

  task automatic fail(string s);
    failures++;
    if (failures < 10) $display("FAIL %s", s);
  endtask

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; in_bank = 0; in_hit = 0; mask_bit = 0; in_coord = '0; in_tg_base = 0; in_side = '0;
    ht_we = 0; ht_bank = 0; cb_we = 0; tg_we = 0; tg_bank = 0; ht_addr = 0; tg_addr = 0; cb_addr = 0;
    ht_data = '0;
    for (int i = 0; i < N_FEAT; i++) begin cb_data[i] = 0; tg_data[i] = 0; end
    base[0] = 18'd0; base[1] = 18'd200;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // fill memories
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < HT; a++) begin
        @(negedge clk);
        ht_we = 1; ht_bank = 1'(b); ht_addr = 8'(a);
        ht_data.index   = ($urandom % 2) ? 18'($urandom % 4096) : 18'(4096 + base[b] + $urandom % TGD);
        ht_data.density = 16'($urandom % 16'h7800);
        mht[b][a] = ht_data;
      end
    @(negedge clk) ht_we = 0;
    for (int a = 0; a < CBD; a++) begin
      @(negedge clk);
      cb_we = 1; cb_addr = 12'(a);
      for (int i = 0; i < N_FEAT; i++) begin cb_data[i] = 16'($urandom); mcb[a][i] = cb_data[i]; end
    end
    @(negedge clk) cb_we = 0;
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < TGD; a++) begin
        @(negedge clk);
        tg_we = 1; tg_bank = 1'(b); tg_addr = 8'(a);
        for (int i = 0; i < N_FEAT; i++) begin tg_data[i] = 8'($urandom); mtg[b][a][i] = tg_data[i]; end
      end
    @(negedge clk) tg_we = 0;

    // vertex stream
    for (int t = 0; t < 3000; t++) begin
      vin_t x;
      @(negedge clk);
      // check the output of the vertex issued 3 cycles ago
      if (hist.exists(t - 3) && hist[t - 3].v) begin
        automatic vin_t o = hist[t - 3];
        automatic hentry_t e = mht[o.bank][href(o.c)];
        automatic logic keep = o.hit && o.mask;
        automatic logic cb = e.index < 4096;
        checks++;
        if (!out_valid || out_side !== o.side) fail("valid/side");
        checks++;
        if (out_miss !== !o.hit || out_masked !== (o.hit && !o.mask) ||
            out_from_cb !== (keep && cb) || out_from_tg !== (keep && !cb)) fail("flags");
        checks++;
        if (out_density !== (keep ? e.density : 16'h0)) fail("density");
        for (int i = 0; i < N_FEAT; i++) begin
          fp16_t ex;
          if (!keep) ex = 16'h0;
          else if (cb) ex = mcb[e.index][i];
          else ex = {8'h0, mtg[o.bank][8'(e.index - 4096 - base[o.bank])][i]};
          checks++;
          if (out_feat[i] !== ex) fail($sformatf("feat t=%0d lane %0d: %h expected %h", t - 3, i, out_feat[i], ex));
        end
        if (!o.hit) n_miss++; else if (!o.mask) n_mask++; else if (cb) n_cb++; else n_tg++;
      end else if (hist.exists(t - 3)) begin
        checks++;
        if (out_valid) fail("spurious valid");
      end
      // mask bit for the vertex issued 2 cycles ago
      mask_bit = hist.exists(t - 2) ? hist[t - 2].mask : 1'b0;
      // new vertex
      x.v = ($urandom % 5) != 0;
      x.c = '{x: 8'($urandom), y: 8'($urandom), z: 8'($urandom)};
      x.bank = 1'($urandom);
      x.hit = ($urandom % 8) != 0;
      x.mask = ($urandom % 4) != 0;
      x.side = '{weight: 16'($urandom), tag: 6'($urandom), last: 1'($urandom)};
      hist[t] = x;
      in_valid = x.v; in_coord = x.c; in_bank = x.bank; in_hit = x.hit; in_side = x.side;
      in_tg_base = base[x.bank];
    end
    checks++;
    if (n_cb == 0 || n_tg == 0 || n_mask == 0 || n_miss == 0) fail("a decode case never happened");
    $display("codebook %0d, true grid %0d, masked %0d, miss %0d", n_cb, n_tg, n_mask, n_miss);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
