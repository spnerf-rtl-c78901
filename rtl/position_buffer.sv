// position_buffer: double-buffered store of the sample points of a batch,
// where the SGPU's dataflow starts. Each entry holds a sample position (x,
// y, z in FP16 grid units) and the encoded view direction of its ray (27
// FP16 values), which is concatenated with the interpolated features when
// the MLP input vector is written. Carrying the view direction here is this
// design's choice: the paper says the view direction is concatenated but
// not where it comes from.
//
// Ping-pong protocol (this design's choice): the producer writes entries
// into the bank it owns while wr_ready is high and then pulses commit with
// the number of entries; the bank becomes readable and the producer moves
// to the other bank. The consumer sees rd_avail / rd_count for its bank,
// reads positions (pos_addr) and view directions (view_addr) with one cycle
// latency, and pulses release when done, which frees the bank.
module position_buffer
  import spnerf_pkg::*;
#(
  parameter int unsigned DEPTH = BATCH,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // producer
  output logic          wr_ready,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  fpos_t         wr_pos,
  input  fp16_t         wr_view [N_VIEW],
  input  logic          commit,
  input  logic [AW:0]   commit_count,
  // consumer
  output logic          rd_avail,
  output logic [AW:0]   rd_count,
  input  logic [AW-1:0] pos_addr,
  output fpos_t         pos_data,
  input  logic [AW-1:0] view_addr,
  output fp16_t         view_data [N_VIEW],
  input  logic          release_bank
);
  fpos_t                pmem [2*DEPTH];   // bank is the top address bit
  logic [N_VIEW*16-1:0] vmem [2*DEPTH];
  logic [N_VIEW*16-1:0] vq, vwd;
  logic                 full [2];
  logic [AW:0]          count [2];
  logic                 wp, rp;

  assign wr_ready = !full[wp];
  assign rd_avail = full[rp];
  assign rd_count = count[rp];

  always_comb
    for (int i = 0; i < N_VIEW; i++) vwd[i*16 +: 16] = wr_view[i];

  always_ff @(posedge clk) begin
    if (wr_en && wr_ready) begin
      pmem[{wp, wr_addr}] <= wr_pos;
      vmem[{wp, wr_addr}] <= vwd;
    end
    pos_data <= pmem[{rp, pos_addr}];
    vq       <= vmem[{rp, view_addr}];
  end

  always_comb
    for (int i = 0; i < N_VIEW; i++) view_data[i] = vq[i*16 +: 16];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= 1'b0; rp <= 1'b0;
      full[0] <= 1'b0; full[1] <= 1'b0;
      count[0] <= '0; count[1] <= '0;
    end else begin
      if (commit && wr_ready) begin
        full[wp]  <= 1'b1;
        count[wp] <= commit_count;
        wp        <= ~wp;
      end
      if (release_bank && full[rp]) begin
        full[rp] <= 1'b0;
        rp       <= ~rp;
      end
    end
  end

  a_commit_free:  assert property (@(posedge clk) disable iff (!rst_n) commit |-> wr_ready);
  a_release_full: assert property (@(posedge clk) disable iff (!rst_n) release_bank |-> full[rp]);
endmodule
