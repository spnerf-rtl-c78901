// tb_position_buffer: exercises the ping-pong protocol: fills and commits
// both banks (wr_ready must then drop), reads positions and view directions
// of each bank, releases them in order and checks counts and flags.
module tb_position_buffer;
  import spnerf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_ready, wr_en, commit, rd_avail, release_bank;
  logic [5:0] wr_addr, pos_addr, view_addr;
  logic [6:0] commit_count, rd_count;
  fpos_t wr_pos, pos_data;
  fp16_t wr_view [N_VIEW];
  fp16_t view_data [N_VIEW];
  fpos_t mpos [2][64];
  fp16_t mview [2][64][N_VIEW];
  int    mcnt [2];
  int checks = 0, failures = 0;

  position_buffer dut (.*);

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic fill(int b, int n);
    for (int a = 0; a < n; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 6'(a); wr_pos = {16'($urandom), 16'($urandom), 16'($urandom)};
      mpos[b][a] = wr_pos;
      for (int i = 0; i < N_VIEW; i++) begin wr_view[i] = 16'($urandom); mview[b][a][i] = wr_view[i]; end
    end
    @(negedge clk);
    wr_en = 0; commit = 1; commit_count = 7'(n); mcnt[b] = n;
    @(negedge clk);
    commit = 0;
  endtask

  task automatic drain(int b);
    check("avail", rd_avail === 1'b1);
    check("count", rd_count === 7'(mcnt[b]));
    for (int a = 0; a < mcnt[b]; a++) begin
      automatic int va = $urandom % mcnt[b];
      @(negedge clk); pos_addr = 6'(a); view_addr = 6'(va);
      @(negedge clk);
      check("pos", pos_data === mpos[b][a]);
      for (int i = 0; i < N_VIEW; i++) check("view", view_data[i] === mview[b][va][i]);
    end
    @(negedge clk) release_bank = 1;
    @(negedge clk) release_bank = 0;
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr_en = 0; commit = 0; release_bank = 0; wr_addr = 0; pos_addr = 0; view_addr = 0;
    commit_count = 0; wr_pos = '0;
    for (int i = 0; i < N_VIEW; i++) wr_view[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check("empty", !rd_avail && wr_ready);
    fill(0, 64);
    check("avail after commit", rd_avail);
    fill(1, 17);
    check("both full -> not ready", !wr_ready);
    drain(0);
    check("ready after release", wr_ready);
    fill(0, 33);
    drain(1);
    drain(0);
    check("empty at end", !rd_avail && wr_ready);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
