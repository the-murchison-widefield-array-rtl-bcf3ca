// xmac_node: one correlation node, serving the coarse channel(s) routed to it.
//
// Words from the cross-connect are corner-turned into the double-buffered
// one-second assembly block (xmac_assembly); each complete block is correlated
// by the cross-multiply-accumulate engine (xmac_engine), which reads the other
// block of the pair while the next second is being assembled; the integrated,
// packed-triangular visibility set is converted to floats and framed for the
// archive (xmac_output). This mirrors the published per-server split into data
// reception, assembly buffers, correlation and output formatting.
//
// Interface: data words in on in_valid/in_ready; archive words out on
// out_valid/out_ready with out_sop/out_eop around each one-second record;
// fscrunch_log2 selects averaging over 1, 2, 4 or 8 fine channels and half_sec
// selects two half-second records per block instead of one one-second record;
// both are sampled at the start of each block.
module xmac_node
  import mwa_pkg::*;
#(
  parameter int unsigned P_NIN    = NIN,
  parameter int unsigned P_NF2    = NF2,
  parameter int unsigned P_NGROUP = NGROUP,
  parameter int unsigned P_NMGT   = NMGT,
  parameter int unsigned P_NPFB   = NPFB,
  parameter int unsigned P_NCC    = 1,
  parameter int unsigned P_NFRAME = NFRAME,
  parameter int unsigned P_NBANK  = NBANK
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [1:0]  fscrunch_log2,
  input  logic        half_sec,
  input  vcs_word_t   in_word,
  input  logic        in_valid,
  output logic        in_ready,
  output logic [31:0] out_data,
  output logic        out_valid,
  input  logic        out_ready,
  output logic        out_sop,
  output logic        out_eop,
  output logic [15:0] n_blocks,
  output logic [15:0] n_stall,
  output logic [15:0] n_resync,
  output logic [15:0] n_late
);
  localparam int unsigned NST  = P_NPFB * P_NIN / 2;
  localparam int unsigned NCH  = P_NCC * P_NMGT * P_NGROUP * P_NF2;
  localparam int unsigned NT   = P_NFRAME * P_NBANK;
  localparam int unsigned ST_W = $clog2(NST);
  localparam int unsigned CH_W = $clog2(NCH);
  localparam int unsigned T_W  = $clog2(NT);

  logic             blk_valid, blk_buf, blk_take, blk_done, done_buf;
  logic [SEC_W-1:0] blk_sec;
  logic             rd_buf;
  logic [T_W-1:0]   rd_t;
  logic [CH_W-1:0]  rd_ch;
  logic [ST_W-1:0]  rd_sta, rd_stb;
  logic [31:0]      rd_a, rd_b;

  logic signed [31:0] vis_re [4], vis_im [4];
  logic [CH_W-1:0]    vis_ch;
  logic [ST_W-1:0]    vis_s1, vis_s2;
  logic [SEC_W-1:0]   vis_sec;
  logic [1:0]         vis_fs;
  logic               vis_first, vis_part, vis_last, vis_valid, vis_ready;

  xmac_assembly #(
    .P_NIN(P_NIN), .P_NF2(P_NF2), .P_NGROUP(P_NGROUP), .P_NMGT(P_NMGT),
    .P_NPFB(P_NPFB), .P_NCC(P_NCC), .P_NFRAME(P_NFRAME), .P_NBANK(P_NBANK)
  ) u_asm (
    .clk, .rst_n, .in_word, .in_valid, .in_ready,
    .blk_valid, .blk_buf, .blk_sec, .blk_take, .blk_done, .done_buf,
    .rd_buf, .rd_t, .rd_ch, .rd_sta, .rd_stb, .rd_a, .rd_b,
    .n_blocks, .n_stall, .n_resync, .n_late
  );

  xmac_engine #(
    .P_NIN(P_NIN), .P_NF2(P_NF2), .P_NGROUP(P_NGROUP), .P_NMGT(P_NMGT),
    .P_NPFB(P_NPFB), .P_NCC(P_NCC), .P_NFRAME(P_NFRAME), .P_NBANK(P_NBANK)
  ) u_eng (
    .clk, .rst_n, .fscrunch_log2, .half_sec,
    .blk_valid, .blk_buf, .blk_sec, .blk_take, .blk_done, .done_buf,
    .rd_buf, .rd_t, .rd_ch, .rd_sta, .rd_stb, .rd_a, .rd_b,
    .vis_re, .vis_im, .vis_ch, .vis_s1, .vis_s2, .vis_sec, .vis_fs,
    .vis_first, .vis_part, .vis_last, .vis_valid, .vis_ready
  );

  xmac_output #(.P_NST(NST), .P_NCH(NCH)) u_out (
    .clk, .rst_n, .vis_re, .vis_im, .vis_sec, .vis_fs, .vis_part, .vis_last, .vis_valid, .vis_ready,
    .out_data, .out_valid, .out_ready, .out_sop, .out_eop
  );
endmodule
