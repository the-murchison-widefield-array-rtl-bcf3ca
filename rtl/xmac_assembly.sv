// xmac_assembly: double-buffered assembly of one second of correlator input.
//
// Packets from all lanes routed to this node arrive interleaved in any order.
// Each data word (one time sample of one fine channel for one dual-polarisation
// station, two 4+4-bit samples) is promoted to 8+8 bits per sample and written
// straight to its place in a block ordered time, channel, station, polarisation,
// real/imaginary (slowest to fastest). That write address is the corner turn:
//   t   = mgt_bank*NFRAME + mgt_frame
//   ch  = ((coarse_local*NMGT + mgt_id)*NGROUP + mgt_group)*NF2 + f2
//   st  = pfb_id*(NIN/2) + (word index mod NIN/2),  f2 = word index div NIN/2
// so the four boards' inputs are concatenated in packet order and no input is
// re-ordered; correlation products are re-mapped afterwards instead. A block
// holds one second (NBANK banks of NFRAME samples) and there are two blocks: the
// second with an even label fills block 0, an odd one block 1. A block is handed
// to the correlation engine when every word has arrived. A word for a block the
// engine still owns stalls the input (in_ready low) so no writer can run ahead
// and overwrite it; a word of a newer second landing on a block that is still
// filling an older, incomplete second discards that block and restarts it
// (resynchronisation), so incomplete data are never correlated; a word older than
// the block it maps to is dropped. The block layout, promotion, double buffering
// and the no-overwrite rule follow the published design; the even/odd block
// choice, the completion count and the resynchronisation rule are this design's.
//
// Interface: words in on in_valid/in_ready (one per cycle). blk_valid offers the
// oldest complete block (blk_buf, blk_sec); blk_take moves it to the engine,
// blk_done (with done_buf) frees it. Two read ports (a, b) return one station
// word {p0 re, p0 im, p1 re, p1 im} one cycle after the address.
module xmac_assembly
  import mwa_pkg::*;
#(
  parameter int unsigned P_NIN    = NIN,
  parameter int unsigned P_NF2    = NF2,
  parameter int unsigned P_NGROUP = NGROUP,
  parameter int unsigned P_NMGT   = NMGT,
  parameter int unsigned P_NPFB   = NPFB,
  parameter int unsigned P_NCC    = 1,          // coarse channels per node
  parameter int unsigned P_NFRAME = NFRAME,
  parameter int unsigned P_NBANK  = NBANK,
  localparam int unsigned NST     = P_NPFB * P_NIN / 2,
  localparam int unsigned NCH     = P_NCC * P_NMGT * P_NGROUP * P_NF2,
  localparam int unsigned NT      = P_NFRAME * P_NBANK,
  localparam int unsigned ST_W    = $clog2(NST),
  localparam int unsigned CH_W    = $clog2(NCH),
  localparam int unsigned T_W     = $clog2(NT)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  vcs_word_t        in_word,
  input  logic             in_valid,
  output logic             in_ready,
  output logic             blk_valid,
  output logic             blk_buf,
  output logic [SEC_W-1:0] blk_sec,
  input  logic             blk_take,
  input  logic             blk_done,
  input  logic             done_buf,
  input  logic             rd_buf,
  input  logic [T_W-1:0]   rd_t,
  input  logic [CH_W-1:0]  rd_ch,
  input  logic [ST_W-1:0]  rd_sta,
  input  logic [ST_W-1:0]  rd_stb,
  output logic [31:0]      rd_a,
  output logic [31:0]      rd_b,
  output logic [15:0]      n_blocks,    // blocks completed
  output logic [15:0]      n_stall,     // cycles a word waited for a busy block
  output logic [15:0]      n_resync,    // incomplete blocks discarded
  output logic [15:0]      n_late       // words dropped as older than their block
);
  localparam int unsigned HALF  = P_NIN / 2;
  localparam longint unsigned DEPTH = longint'(NT) * NCH * NST;   // station words per block
  localparam int unsigned CNT_W = $clog2(DEPTH + 1);

  typedef enum logic [1:0] {B_FREE, B_FILL, B_FULL, B_BUSY} bstate_t;

  logic [31:0]      mem [2][NT][NCH][NST];
  bstate_t          bst [2];
  logic [SEC_W-1:0] btag [2];
  logic [CNT_W-1:0] bcnt [2];

  // ---------------- corner turn ----------------
  logic             b;
  logic [T_W-1:0]   wt;
  logic [CH_W-1:0]  wch;
  logic [ST_W-1:0]  wst;
  logic [31:0]      wdata;
  logic [15:0]      s0, s1;
  logic             inv0, inv1;
  logic signed [SEC_W-1:0] age;   // in_word.sec - tag of its block

  sample_promote u_p0 (.in_sample(in_word.data[15:8]), .out_sample(s0), .invalid(inv0));
  sample_promote u_p1 (.in_sample(in_word.data[7:0]),  .out_sample(s1), .invalid(inv1));

  always_comb begin
    int unsigned w, f2, cc;
    w     = int'(in_word.widx);
    f2    = w / HALF;
    cc    = int'(in_word.hdr.mgt_channel) % P_NCC;
    b     = in_word.sec[0];
    wt    = T_W'(int'(in_word.hdr.mgt_bank) * P_NFRAME + int'(in_word.hdr.mgt_frame));
    wch   = CH_W'(((cc * P_NMGT + int'(in_word.hdr.mgt_id)) * P_NGROUP
                   + int'(in_word.hdr.mgt_group)) * P_NF2 + f2);
    wst   = ST_W'(int'(in_word.hdr.pfb_id) * HALF + (w % HALF));
    wdata = {s0, s1};
    age   = $signed(in_word.sec - btag[b]);
  end

  // ---------------- block ownership ----------------
  logic accept, stall, late, restart;
  always_comb begin
    accept  = 1'b0;
    stall   = 1'b0;
    late    = 1'b0;
    restart = 1'b0;
    unique case (bst[b])
      B_FREE: accept = 1'b1;
      B_FILL: begin
        if (age < 0) late = 1'b1;
        else begin
          accept  = 1'b1;
          restart = (age != 0);
        end
      end
      default: begin              // FULL or BUSY: held for the engine
        if (age <= 0) late = 1'b1;
        else          stall = 1'b1;
      end
    endcase
    accept = accept && in_valid;
    late   = late && in_valid;
  end
  // ready does not depend on in_valid, only on the word offered
  assign in_ready = !stall;

  always_ff @(posedge clk) begin
    if (accept) mem[b][wt][wch][wst] <= wdata;
    rd_a <= mem[rd_buf][rd_t][rd_ch][rd_sta];
    rd_b <= mem[rd_buf][rd_t][rd_ch][rd_stb];
  end

  // oldest complete block first
  always_comb begin
    logic f0, f1;
    f0 = (bst[0] == B_FULL);
    f1 = (bst[1] == B_FULL);
    blk_valid = f0 || f1;
    if (f0 && f1) blk_buf = ($signed(btag[1] - btag[0]) < 0);
    else          blk_buf = f1;
    blk_sec = btag[blk_buf];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 2; i++) begin
        bst[i]  <= B_FREE;
        btag[i] <= '0;
        bcnt[i] <= '0;
      end
      n_blocks <= '0;
      n_stall  <= '0;
      n_resync <= '0;
      n_late   <= '0;
    end else begin
      if (accept) begin
        logic [CNT_W-1:0] c;
        c = (bst[b] == B_FREE || restart) ? CNT_W'(1) : bcnt[b] + 1'b1;
        bcnt[b] <= c;
        btag[b] <= in_word.sec;
        if (c == CNT_W'(DEPTH)) begin
          bst[b]   <= B_FULL;
          n_blocks <= n_blocks + 1'b1;
        end else bst[b] <= B_FILL;
        if (restart) n_resync <= n_resync + 1'b1;
      end
      if (stall && in_valid) n_stall <= n_stall + 1'b1;
      if (late)  n_late  <= n_late + 1'b1;
      if (blk_take && blk_valid) bst[blk_buf] <= B_BUSY;
      if (blk_done) bst[done_buf] <= B_FREE;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) blk_done |-> bst[done_buf] == B_BUSY);
endmodule
