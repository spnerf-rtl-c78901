// tb_grid_id_unit: random FP16 sample positions; for every point checks the
// eight vertex coordinates, their weights against (1-|p-g|) products worked
// out with the real-valued FP16 reference, the tag and last flags, and that
// a stream of points leaves at one vertex per cycle (8 cycles per point).
module tb_grid_id_unit;
  import spnerf_pkg::*;
  import fp16_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid;
  fpos_t in_pos;
  logic [5:0] in_tag;
  vcoord_t out_coord;
  vside_t out_side;
  int checks = 0, failures = 0;

  grid_id_unit dut (.*);

  localparam int NP = 300;
  fpos_t pts [NP];
  int    first_out = -1, last_out = -1, cyc = 0, nout = 0;

  always @(negedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_vertex(int p, int v);
    real    pr [3];
    int     g [3];
    logic [15:0] f [3], omf [3], w;
    pr[0] = f2r(pts[p].x); pr[1] = f2r(pts[p].y); pr[2] = f2r(pts[p].z);
    for (int a = 0; a < 3; a++) begin
      g[a]   = int'($floor(pr[a]));
      f[a]   = r2f(pr[a] - real'(g[a]));
      omf[a] = fadd(16'h3C00, {~f[a][15], f[a][14:0]});
    end
    w = fmul(fmul(v[0] ? f[0] : omf[0], v[1] ? f[1] : omf[1]), v[2] ? f[2] : omf[2]);
    checks++;
    if (out_coord.x !== 8'(g[0] + v[0]) || out_coord.y !== 8'(g[1] + v[1]) ||
        out_coord.z !== 8'(g[2] + v[2]) || out_side.weight !== w ||
        out_side.tag !== 6'(p) || out_side.last !== (v == 7)) begin
      failures++;
      if (failures < 10)
        $display("MISMATCH point %0d vertex %0d: (%0d,%0d,%0d) w=%h tag=%0d last=%b; expected (%0d,%0d,%0d) w=%h",
                 p, v, out_coord.x, out_coord.y, out_coord.z, out_side.weight, out_side.tag,
                 out_side.last, g[0] + v[0], g[1] + v[1], g[2] + v[2], w);
    end
  endtask

  // output checker
  initial begin
    @(posedge rst_n);
    for (int p = 0; p < NP; p++)
      for (int v = 0; v < 8; v++) begin
        do @(negedge clk); while (!out_valid);
        if (first_out < 0) first_out = cyc;
        last_out = cyc;
        expect_vertex(p, v);
      end
    // rate: 8 * NP vertices in 8 * NP consecutive cycles
    checks++;
    if (last_out - first_out != 8 * NP - 1) begin
      failures++;
      $display("RATE: %0d vertices took %0d cycles", 8 * NP, last_out - first_out + 1);
    end
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < NP; p++) begin
      real r [3];
      for (int a = 0; a < 3; a++) r[a] = real'($urandom % 158) + real'($urandom % 65536) / 65536.0;
      if (p == 0) begin r[0] = 5.0; r[1] = 0.5; r[2] = 100.25; end   // integer and exact cases
      pts[p] = '{x: r2f(r[0]), y: r2f(r[1]), z: r2f(r[2])};
      if (int'($floor(f2r(pts[p].x))) > 157) pts[p].x = r2f(157.5);
      if (int'($floor(f2r(pts[p].y))) > 157) pts[p].y = r2f(157.5);
      if (int'($floor(f2r(pts[p].z))) > 157) pts[p].z = r2f(157.5);
    end
    in_valid = 0; in_pos = '0; in_tag = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NP; p++) begin
      @(negedge clk);
      in_valid = 1; in_pos = pts[p]; in_tag = 6'(p);
      do @(posedge clk); while (!in_ready);
    end
    @(negedge clk) in_valid = 0;
  end
endmodule
