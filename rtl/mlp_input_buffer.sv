// mlp_input_buffer: double-buffered MLP input buffer in the block-circulant
// storage format of the paper (its Fig. 6).
//
// A batch holds BATCH (64) vectors. The buffer has NB (16) banks; each bank
// row r holds element r of four vectors (4 lanes). Vectors are grouped by
// four, group g = v / 4, lane v % 4. Element e of a vector lies in block
// b = e / 4 and is stored in bank (g + b) mod NB, row e, lane v % 4: the
// four elements of a block sit in successive rows of one bank and each
// following block moves to the next bank, so a 40-element input vector
// (39 values plus one zero pad) spreads over 10 banks. Reading row r from
// all banks returns element r of all 64 vectors at once, but rotated by
// (r / 4) banks; the shift logic rotates it back so that output lane v is
// vector v, i.e. row v of the systolic array.
//
// Ports and timing:
//  * vec_* (SGPU side, producer half): one whole vector; written one element
//    of each block per cycle, 4 cycles per vector (vec_busy high meanwhile).
//  * row_* (activation side, consumer half): element row_row of all 64
//    vectors in one cycle (writing back a hidden layer's outputs).
//  * rd_*  (systolic-array side, consumer half): rd_data one cycle after
//    rd_en.
//  * Ping-pong: fill_ready / fill_commit / fill_count for the producer
//    (the half becomes full once its last vector write has finished),
//    batch_avail / batch_count / batch_release for the consumer.
// The bank count NB = 16 is the paper's figure; its text says a 39-element
// vector is interleaved across banks 0 to 9, which is the same layout seen
// from one vector.
module mlp_input_buffer
  import spnerf_pkg::*;
#(
  parameter int unsigned ROWS = HID,                  // longest layer input
  parameter int unsigned VLEN = IN_LEN + 1,           // SGPU vector, padded to 40
  localparam int unsigned NB  = N_BANK,
  localparam int unsigned NV  = NB * BLK,             // 64 vectors per batch
  localparam int unsigned RW  = $clog2(ROWS)
) (
  input  logic          clk,
  input  logic          rst_n,
  // producer (SGPU)
  output logic          fill_ready,
  input  logic          vec_valid,
  input  logic [5:0]    vec_idx,
  input  fp16_t         vec_data [VLEN],
  output logic          vec_busy,
  input  logic          fill_commit,
  input  logic [6:0]    fill_count,
  // consumer (MLP)
  output logic          batch_avail,
  output logic [6:0]    batch_count,
  input  logic          batch_release,
  input  logic          row_we,
  input  logic [RW-1:0] row_row,
  input  fp16_t         row_data [NV],
  input  logic          rd_en,
  input  logic [RW-1:0] rd_row,
  output fp16_t         rd_data [NV]
);
  localparam int unsigned NBLK = VLEN / BLK;

  logic  full [2];
  logic [6:0] count [2];
  logic  wp, rp;

  // ---------------- vector write sequencer ----------------
  fp16_t      vq [VLEN];
  logic [5:0] vidx_q;
  logic [1:0] j;
  logic       vseq;
  assign vec_busy = vseq;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vseq <= 1'b0; j <= '0; vidx_q <= '0;
      for (int e = 0; e < VLEN; e++) vq[e] <= FP16_ZERO;
    end else if (vec_valid && !vseq) begin
      vseq <= 1'b1; j <= 2'd0; vidx_q <= vec_idx;
      for (int e = 0; e < VLEN; e++) vq[e] <= vec_data[e];
    end else if (vseq) begin
      j <= j + 2'd1;
      if (j == 2'(BLK - 1)) vseq <= 1'b0;
    end
  end

  // ---------------- banks: one memory per (bank, lane) ----------------
  // Half (double buffer) is the top address bit. Port 1: SGPU vector write
  // into the producer half; port 2: activation row write into the consumer
  // half; one synchronous read from the consumer half.
  fp16_t       raw [NB][BLK];
  logic [3:0]  rot_q;

  for (genvar k = 0; k < NB; k++) begin : g_bank
    // the block of the vector being written that falls into this bank
    logic [3:0] vb;
    logic       vhit;
    logic [3:0] rg;                       // group whose row lands in this bank
    assign rg   = 4'(k) - 4'(row_row / RW'(BLK));
    assign vb   = 4'(k) - vidx_q[5:2];
    assign vhit = vseq && (int'(vb) < NBLK);
    for (genvar l = 0; l < BLK; l++) begin : g_lane
      fp16_t mem [2*ROWS];
      always_ff @(posedge clk) begin
        if (vhit && vidx_q[1:0] == 2'(l))
          mem[{wp, RW'(BLK * int'(vb) + int'(j))}] <= vq[BLK * int'(vb) + int'(j)];
        if (row_we)
          mem[{rp, row_row}] <= row_data[BLK * int'(rg) + l];
        if (rd_en)
          raw[k][l] <= mem[{rp, rd_row}];
      end
    end
  end

  always_ff @(posedge clk)
    if (rd_en) rot_q <= 4'(rd_row / BLK);

  // shift logic: undo the (row / 4)-bank rotation of the read result
  always_comb
    for (int g = 0; g < NB; g++)
      for (int l = 0; l < BLK; l++)
        rd_data[BLK * g + l] = raw[(g + int'(rot_q)) % NB][l];

  // ---------------- ping-pong control ----------------
  // A commit may arrive while the last vector is still being written (the
  // SGPU does not wait for the 4-cycle write); it is held in pend until
  // the sequencer is idle, and the producer sees fill_ready low meanwhile.
  logic       pend;
  logic [6:0] pend_cnt;
  assign fill_ready  = !full[wp] && !pend;
  assign batch_avail = full[rp];
  assign batch_count = count[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= 1'b0; rp <= 1'b0;
      full[0] <= 1'b0; full[1] <= 1'b0; count[0] <= '0; count[1] <= '0;
      pend <= 1'b0; pend_cnt <= '0;
    end else begin
      if (fill_commit) begin
        pend <= 1'b1; pend_cnt <= fill_count;
      end else if (pend && !vseq && !vec_valid && !full[wp]) begin
        pend <= 1'b0;
        full[wp] <= 1'b1; count[wp] <= pend_cnt; wp <= ~wp;
      end
      if (batch_release && full[rp]) begin
        full[rp] <= 1'b0; rp <= ~rp;
      end
    end
  end

  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) vec_valid |-> !vseq);
  a_commit_once: assert property (@(posedge clk) disable iff (!rst_n) fill_commit |-> !pend);
endmodule
