// Shared body of the end-to-end testbenches of spnerf_top (included by
// tb_spnerf_top with a reduced geometry and by tb_spnerf_top_full with the
// top's default, paper-sized parameters). The including module defines the
// localparams P_COLS, P_HT, P_TGD, P_SGW, P_GY, P_GZ and the instance.
//
// Scenario:
//  * all on-chip memories are filled through the top's fill ports: random
//    hash-table entries (half codebook indices, half true-grid indices),
//    random bitmaps (about 3/4 of the vertices kept), a random codebook, a
//    random INT8 true grid, random weights in both weight halves;
//  * subgrids 4 and 5 are announced in banks 0 and 1;
//  * batches 0..2 (64 points each) cover subgrids 4..6 so that vertices in
//    subgrid 6 miss; they are written back to back, so the position-buffer
//    producer has to wait for a free bank and the SGPU has to wait for a
//    free MLP input-buffer half;
//  * after batch 2 bank 0 is reloaded with subgrid 6 (new hash table,
//    bitmap and true grid, new tg_base) and a partial batch 3 of 40 points
//    covering subgrids 5..7 is run with the other weight half.
// Every point's density and every batch's three MLP outputs are compared
// bit-exactly with a reference model written here from the algorithm
// (hash, subgrid bank selection, bitmap masking, codebook / true-grid
// decoding, FP16 trilinear weights and sums, FP16 MLP with ReLU). The
// top's miss / masked / codebook / true-grid counters are compared with
// the model's counts, and each mechanism (miss, mask, codebook, true grid,
// position-buffer stall, input-buffer stall, subgrid reload, weight-half
// switch, partial batch) must have happened at least once.

  import fp16_ref_pkg::*;
  localparam int HWB = $clog2(P_HT), TGW = $clog2(P_TGD);
  localparam int BMD = (P_SGW * P_GY * P_GZ + 31) / 32;
  localparam int WD  = layer_base(3, P_COLS);
  localparam int NB  = 4;

  logic clk = 0, rst_n = 0;
  fp16_t scale;
  logic pb_wr_ready, pb_wr_en = 0, pb_commit = 0;
  logic [5:0] pb_wr_addr = 0;
  fpos_t pb_wr_pos;
  fp16_t pb_wr_view [N_VIEW];
  logic [6:0] pb_commit_count = 0;
  logic sg_we = 0, sg_bank = 0, sg_valid = 0;
  logic [5:0] sg_id = 0;
  logic [IDX_W-1:0] sg_tg_base = 0;
  logic ht_we = 0, ht_bank = 0;
  logic [HWB-1:0] ht_addr = 0;
  hentry_t ht_data;
  logic cb_we = 0;
  logic [11:0] cb_addr = 0;
  fp16_t cb_data [N_FEAT];
  logic tg_we = 0, tg_bank = 0;
  logic [TGW-1:0] tg_addr = 0;
  logic [7:0] tg_data [N_FEAT];
  logic bm_we = 0, bm_bank = 0;
  logic [$clog2(BMD)-1:0] bm_addr = 0;
  logic [31:0] bm_data = 0;
  logic wb_we = 0, wb_half = 0, w_half = 0;
  logic [$clog2(WD)-1:0] wb_addr = 0;
  fp16_t wb_data [P_COLS];
  logic dens_valid, res_valid, mlp_busy;
  logic [5:0] dens_tag;
  fp16_t dens_data;
  logic [1:0] res_ch;
  fp16_t res_data [BATCH];
  logic [6:0] res_count;
  logic [31:0] cnt_points, cnt_miss, cnt_masked, cnt_from_cb, cnt_from_tg, cnt_batches;

  always #5 clk = ~clk;

  // ---------------- model state ----------------
  hentry_t     mht [2][P_HT];
  logic [31:0] mbm [2][BMD];
  fp16_t       mcb [CB_ENTRIES][N_FEAT];
  logic [7:0]  mtg [2][P_TGD][N_FEAT];
  fp16_t       mw  [2][3][128][128];
  logic        sgv [2];
  int          sgid [2], sgbase [2];
  fp16_t       vec [NB][64][40];
  fp16_t       dens_exp [NB * 64];
  int          bcount [NB];
  int          m_miss = 0, m_masked = 0, m_cb = 0, m_tg = 0;
  int          checks = 0, failures = 0;
  int          n_dens = 0, n_res_batches = 0;
  int          st_pb = 0, st_ib = 0, n_reload = 0, n_whalf = 0;

  task automatic chk(logic c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 30) $display("FAIL %s", s); end
  endtask

  function automatic int href(int x, int y, int z);
    longint unsigned h;
    h = ((longint'(x) * 1) ^ (longint'(y) * 64'd2654435761) ^ (longint'(z) * 64'd805459861));
    return int'(h % P_HT);
  endfunction

  function automatic fp16_t s8f(logic [7:0] v);
    return r2f(real'($signed(v)));
  endfunction

  // ---------------- fill helpers ----------------
  task automatic fill_bank(int b, int sub, int base);
    for (int a = 0; a < P_HT; a++) begin
      hentry_t e;
      if ($urandom % 2) e.index = IDX_W'($urandom % CB_ENTRIES);
      else              e.index = IDX_W'(CB_ENTRIES + base + $urandom % (P_TGD - base));
      e.density = rnd(12, 16) & 16'h7FFF;
      mht[b][a] = e;
      ht_we = 1; ht_bank = 1'(b); ht_addr = HWB'(a); ht_data = e;
      @(negedge clk);
    end
    ht_we = 0;
    for (int a = 0; a < BMD; a++) begin
      mbm[b][a] = $urandom | $urandom;
      bm_we = 1; bm_bank = 1'(b); bm_addr = $bits(bm_addr)'(a); bm_data = mbm[b][a];
      @(negedge clk);
    end
    bm_we = 0;
    for (int a = 0; a < P_TGD; a++) begin
      for (int i = 0; i < N_FEAT; i++) begin mtg[b][a][i] = 8'($urandom); tg_data[i] = mtg[b][a][i]; end
      tg_we = 1; tg_bank = 1'(b); tg_addr = TGW'(a);
      @(negedge clk);
    end
    tg_we = 0;
    sgv[b] = 1; sgid[b] = sub; sgbase[b] = base;
    sg_we = 1; sg_bank = 1'(b); sg_valid = 1; sg_id = 6'(sub); sg_tg_base = IDX_W'(base);
    @(negedge clk); sg_we = 0;
  endtask

  task automatic load_weights(int h);
    for (int l = 0; l < 3; l++) begin
      for (int k = 0; k < 128; k++) for (int n = 0; n < 128; n++)
        mw[h][l][k][n] = (k < layer_k(l) && n < layer_n(l)) ? rnd(9, 13) : 16'h0000;
      for (int t = 0; t < layer_tiles(l, P_COLS); t++)
        for (int k = 0; k < layer_k(l); k++) begin
          for (int c = 0; c < P_COLS; c++) wb_data[c] = (t * P_COLS + c < 128) ? mw[h][l][k][t * P_COLS + c] : 16'h0000;
          wb_addr = $bits(wb_addr)'(layer_base(l, P_COLS) + t * layer_k(l) + k);
          wb_half = 1'(h); wb_we = 1;
          @(negedge clk);
        end
    end
    wb_we = 0;
  endtask

  // ---------------- point model ----------------
  task automatic model_point(int bt, int v, fp16_t p [3]);
    fp16_t f [3], omf [3], w, acc [N_FEAT + 1], prod, val;
    int g0 [3];
    for (int a = 0; a < 3; a++) begin
      g0[a]  = int'(f2r(p[a]));                      // p is non-negative
      if (real'(g0[a]) > f2r(p[a])) g0[a]--;
      f[a]   = fadd(p[a], r2f(-real'(g0[a])));
      omf[a] = fadd(16'h3C00, f[a] ^ 16'h8000);
    end
    for (int i = 0; i <= N_FEAT; i++) acc[i] = 16'h0000;
    for (int vi = 0; vi < 8; vi++) begin
      int x, y, z, k, b, h, lin;
      logic hit, keep;
      hentry_t e;
      x = g0[0] + vi % 2; y = g0[1] + (vi / 2) % 2; z = g0[2] + vi / 4;
      w = fmul(fmul((vi % 2) ? f[0] : omf[0], ((vi / 2) % 2) ? f[1] : omf[1]), (vi / 4) ? f[2] : omf[2]);
      k = x / P_SGW; b = k % 2;
      hit = sgv[b] && sgid[b] == k;
      h = href(x, y, z);
      e = mht[b][h];
      lin = ((x - k * P_SGW) * P_GY + y) * P_GZ + z;
      keep = hit && mbm[b][lin / 32][lin % 32];
      if (!hit) m_miss++;
      else if (!keep) m_masked++;
      else if (e.index < CB_ENTRIES) m_cb++;
      else m_tg++;
      for (int i = 0; i <= N_FEAT; i++) begin
        if (!keep) val = 16'h0000;
        else if (i == N_FEAT) val = e.density;
        else if (e.index < CB_ENTRIES) val = mcb[e.index][i];
        else val = fmul(scale, s8f(mtg[b][int'(e.index) - CB_ENTRIES - sgbase[b]][i]));
        prod = fmul(w, val);
        acc[i] = (vi == 0) ? prod : fadd(acc[i], prod);
      end
    end
    for (int i = 0; i < N_FEAT; i++) vec[bt][v][i] = acc[i];
    dens_exp[bt * 64 + v] = acc[N_FEAT];
  endtask

  function automatic fp16_t pos(int lo, int hi);
    return r2f(real'(lo + $urandom % (hi - lo)) + real'($urandom % 8) / 8.0);
  endfunction

  // write one batch into the position buffer (stalls while no bank is free)
  task automatic send_batch(int bt, int cnt, int xlo, int xhi);
    fp16_t p [3];
    for (int v = 0; v < cnt; v++) begin
      p[0] = pos(xlo, xhi); p[1] = pos(0, P_GY - 1); p[2] = pos(0, P_GZ - 1);
      for (int i = 0; i < N_VIEW; i++) begin vec[bt][v][N_FEAT + i] = rnd(10, 15); pb_wr_view[i] = vec[bt][v][N_FEAT + i]; end
      vec[bt][v][39] = 16'h0000;
      model_point(bt, v, p);
      while (!pb_wr_ready) begin if (v == 0) st_pb++; @(negedge clk); end
      pb_wr_en = 1; pb_wr_addr = 6'(v); pb_wr_pos.x = p[0]; pb_wr_pos.y = p[1]; pb_wr_pos.z = p[2];
      @(negedge clk);
    end
    pb_wr_en = 0;
    bcount[bt] = cnt;
    pb_commit = 1; pb_commit_count = 7'(cnt);
    @(negedge clk); pb_commit = 0;
  endtask

  function automatic fp16_t relu(fp16_t x);
    return x[15] ? 16'h0000 : x;
  endfunction

  // MLP reference for batch bt with weight half h; E[v][ch]
  fp16_t E [NB][64][3];
  task automatic ref_mlp(int bt, int h);
    fp16_t x [128], nxt [128], s;
    for (int v = 0; v < 64; v++) begin
      for (int i = 0; i < 128; i++) x[i] = (i < 40 && v < bcount[bt]) ? vec[bt][v][i] : 16'h0000;
      for (int l = 0; l < 3; l++) begin
        for (int n = 0; n < layer_n(l); n++) begin
          s = 16'h0000;
          for (int k = 0; k < layer_k(l); k++) s = fadd(s, fmul(x[k], mw[h][l][k][n]));
          nxt[n] = (l < 2) ? relu(s) : s;
        end
        for (int n = 0; n < layer_n(l); n++) x[n] = nxt[n];
      end
      for (int n = 0; n < 3; n++) E[bt][v][n] = x[n];
    end
  endtask

  // ---------------- monitors ----------------
  always @(negedge clk) if (rst_n) begin
    if (dens_valid) begin
      chk(dens_data === dens_exp[n_dens], $sformatf("density of point %0d got %h exp %h", n_dens, dens_data, dens_exp[n_dens]));
      n_dens++;
    end
    // SGPU holding a full position-buffer bank while no input-buffer half is free
    if (dut.u_sgpu.pb_avail && !dut.u_sgpu.fill_ready) st_ib++;
  end

  int nres_in_batch = 0;
  always @(negedge clk) if (rst_n && res_valid) begin
    chk(int'(res_count) == bcount[n_res_batches], "result count of batch");
    for (int v = 0; v < bcount[n_res_batches]; v++)
      chk(res_data[v] === E[n_res_batches][v][res_ch],
          $sformatf("batch %0d vec %0d ch %0d got %h exp %h", n_res_batches, v, res_ch, res_data[v], E[n_res_batches][v][res_ch]));
    nres_in_batch++;
    if (nres_in_batch == 3) begin nres_in_batch = 0; n_res_batches++; end
  end

  // ---------------- stimulus ----------------
  initial begin
    scale = 16'h2C00;                                  // 1/16
    for (int i = 0; i < N_VIEW; i++) pb_wr_view[i] = 0;
    for (int i = 0; i < N_FEAT; i++) begin cb_data[i] = 0; tg_data[i] = 0; end
    for (int c = 0; c < P_COLS; c++) wb_data[c] = 0;
    pb_wr_pos = '0; ht_data = '0;
    sgv[0] = 0; sgv[1] = 0; sgid[0] = 0; sgid[1] = 0; sgbase[0] = 0; sgbase[1] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int a = 0; a < CB_ENTRIES; a++) begin
      for (int i = 0; i < N_FEAT; i++) begin mcb[a][i] = rnd(10, 17); cb_data[i] = mcb[a][i]; end
      cb_we = 1; cb_addr = 12'(a);
      @(negedge clk);
    end
    cb_we = 0;
    fill_bank(0, 4, 16);
    fill_bank(1, 5, 40);
    load_weights(0);
    load_weights(1);
    w_half = 0;
    // batches 0..2, back to back
    send_batch(0, 64, 4 * P_SGW, 6 * P_SGW);
    ref_mlp(0, 0);
    send_batch(1, 64, 4 * P_SGW, 7 * P_SGW - 1);
    ref_mlp(1, 0);
    send_batch(2, 64, 4 * P_SGW, 6 * P_SGW);
    ref_mlp(2, 0);
    // wait until the SGPU has finished batch 2, then reload bank 0
    while (n_dens < 192) @(negedge clk);
    repeat (4) @(negedge clk);
    fill_bank(0, 6, 8);
    n_reload++;
    // switch the weight half once the MLP has finished batch 2
    while (n_res_batches < 3) @(negedge clk);
    while (mlp_busy) @(negedge clk);
    w_half = 1; n_whalf++;
    send_batch(3, 40, 5 * P_SGW, 8 * P_SGW - 1);
    ref_mlp(3, 1);
    while (n_res_batches < 4) @(negedge clk);
    repeat (10) @(negedge clk);
    chk(n_dens == 232, $sformatf("%0d densities", n_dens));
    chk(cnt_points == 232, "cnt_points");
    chk(cnt_batches == 4, "cnt_batches");
    chk(int'(cnt_miss) == m_miss, $sformatf("cnt_miss %0d model %0d", cnt_miss, m_miss));
    chk(int'(cnt_masked) == m_masked, $sformatf("cnt_masked %0d model %0d", cnt_masked, m_masked));
    chk(int'(cnt_from_cb) == m_cb, $sformatf("cnt_from_cb %0d model %0d", cnt_from_cb, m_cb));
    chk(int'(cnt_from_tg) == m_tg, $sformatf("cnt_from_tg %0d model %0d", cnt_from_tg, m_tg));
    $display("mechanisms: miss=%0d masked=%0d codebook=%0d true_grid=%0d pb_stall=%0d ib_stall=%0d reload=%0d weight_half_switch=%0d partial_batch=%0d",
             m_miss, m_masked, m_cb, m_tg, st_pb, st_ib, n_reload, n_whalf, bcount[3]);
    chk(m_miss > 0, "mechanism: subgrid miss");
    chk(m_masked > 0, "mechanism: bitmap mask");
    chk(m_cb > 0, "mechanism: codebook decode");
    chk(m_tg > 0, "mechanism: true-grid decode");
    chk(st_pb > 0, "mechanism: position-buffer stall");
    chk(st_ib > 0, "mechanism: input-buffer stall");
    chk(n_reload > 0 && n_whalf > 0, "mechanism: subgrid reload / weight-half switch");
    chk(bcount[3] < 64, "mechanism: partial batch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
