// xmac_engine: cross-multiply and accumulate over one assembled block.
//
// For every output channel, every station s1 and every station s2 <= s1 (the
// lower triangle of the correlation matrix including the autocorrelations on
// the diagonal), the engine forms the four polarisation products
//   V[p1][p2] = sum over t, f of  x[s1][p1] * conj(x[s2][p2])
// and integrates them over all NT time samples of the block and, when
// fscrunch_log2 = k, over 2**k adjacent fine channels. Integration happens in
// the accumulator registers and each finished visibility leaves at once, so no
// accumulator memory is needed; the output is the packed triangular set in the
// order channel, s1, s2, p1, p2, real/imaginary. One station pair and time sample
// is processed per clock. The accumulators are ACC_W-bit integers: with 4-bit
// inputs every product term is at most 128 in magnitude, so one second of
// 10000 samples (times up to 8 channels) stays below 2**24 and converts exactly
// to the 32-bit floating point the published correlator produces. The loop order,
// the register-level integration, the triangular output and its ordering follow
// the published design; the conjugation convention (conjugate on s2), the
// integer accumulators and the serial one-pair-per-clock schedule are this
// design's choices (the published engine spreads the pairs over GPU threads).
//
// With half_sec set (sampled with fscrunch_log2 when a block is taken) the block
// is correlated in two passes, the first over time samples 0..NT/2-1 and the
// second over NT/2..NT-1, giving two visibility sets of half a second each
// (vis_part 0 and 1); NT must then be even. The published correlator integrates
// over a user-defined time of 0.5 s to 2 s; the half-block pass is this design's
// way of providing the 0.5 s case without an accumulator memory.
//
// Timing: after blk_take, each visibility takes 2**k * NT clocks (2**k * NT/2
// with half_sec) to accumulate, plus two clocks, then waits on
// vis_valid/vis_ready. blk_done pulses when the last visibility of the block's
// last pass is accepted.
module xmac_engine
  import mwa_pkg::*;
#(
  parameter int unsigned P_NIN    = NIN,
  parameter int unsigned P_NF2    = NF2,
  parameter int unsigned P_NGROUP = NGROUP,
  parameter int unsigned P_NMGT   = NMGT,
  parameter int unsigned P_NPFB   = NPFB,
  parameter int unsigned P_NCC    = 1,
  parameter int unsigned P_NFRAME = NFRAME,
  parameter int unsigned P_NBANK  = NBANK,
  parameter int unsigned ACC_W    = 32,
  localparam int unsigned NST     = P_NPFB * P_NIN / 2,
  localparam int unsigned NCH     = P_NCC * P_NMGT * P_NGROUP * P_NF2,
  localparam int unsigned NT      = P_NFRAME * P_NBANK,
  localparam int unsigned ST_W    = $clog2(NST),
  localparam int unsigned CH_W    = $clog2(NCH),
  localparam int unsigned T_W     = $clog2(NT)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [1:0]              fscrunch_log2,   // channels averaged: 1, 2, 4 or 8
  input  logic                    half_sec,        // two half-second sets per block
  // block hand-over from the assembly buffer
  input  logic                    blk_valid,
  input  logic                    blk_buf,
  input  logic [SEC_W-1:0]        blk_sec,
  output logic                    blk_take,
  output logic                    blk_done,
  output logic                    done_buf,
  // read ports of the assembly buffer
  output logic                    rd_buf,
  output logic [T_W-1:0]          rd_t,
  output logic [CH_W-1:0]         rd_ch,
  output logic [ST_W-1:0]         rd_sta,
  output logic [ST_W-1:0]         rd_stb,
  input  logic [31:0]             rd_a,
  input  logic [31:0]             rd_b,
  // visibility output
  output logic signed [ACC_W-1:0] vis_re [4],      // index p1*2+p2
  output logic signed [ACC_W-1:0] vis_im [4],
  output logic [CH_W-1:0]         vis_ch,          // output channel
  output logic [ST_W-1:0]         vis_s1,
  output logic [ST_W-1:0]         vis_s2,
  output logic [SEC_W-1:0]        vis_sec,
  output logic [1:0]              vis_fs,          // fscrunch_log2 used for this block
  output logic                    vis_first,       // first visibility of the set
  output logic                    vis_part,        // which half of the block (half_sec)
  output logic                    vis_last,        // last visibility of the block
  output logic                    vis_valid,
  input  logic                    vis_ready
);
  typedef enum logic [1:0] {E_IDLE, E_RUN, E_WAIT, E_OUT} estate_t;
  estate_t state;

  logic [1:0]       fs;
  logic [CH_W-1:0]  cg;          // output channel
  logic [CH_W-1:0]  f;           // channel within the output channel
  logic [T_W-1:0]   t;
  logic [ST_W-1:0]  s1, s2;
  logic             v1, v1_first;
  logic             hs, pass;
  logic [T_W-1:0]   t_lo, t_hi;   // time range of the current pass
  logic [CH_W:0]    nf;          // 2**fs
  logic [CH_W:0]    ncg;         // NCH / 2**fs

  assign t_lo = (hs && pass) ? T_W'(NT / 2) : '0;
  assign t_hi = (hs && !pass) ? T_W'(NT / 2 - 1) : T_W'(NT - 1);
  assign nf  = (CH_W+1)'(1) << fs;
  assign ncg = (CH_W+1)'(NCH) >> fs;

  assign rd_t   = t;
  assign rd_ch  = CH_W'((int'(cg) << fs) + int'(f));
  assign rd_sta = s1;
  assign rd_stb = s2;

  // complex products of the two station words
  logic signed [7:0]  ar [2], ai [2], br [2], bi [2];
  logic signed [17:0] pre [4], pim [4];
  always_comb begin
    {ar[0], ai[0], ar[1], ai[1]} = rd_a;
    {br[0], bi[0], br[1], bi[1]} = rd_b;
    for (int p1 = 0; p1 < 2; p1++)
      for (int p2 = 0; p2 < 2; p2++) begin
        pre[p1*2+p2] = 18'(ar[p1] * br[p2]) + 18'(ai[p1] * bi[p2]);
        pim[p1*2+p2] = 18'(ai[p1] * br[p2]) - 18'(ar[p1] * bi[p2]);
      end
  end

  logic issue_last;
  assign issue_last = (t == t_hi) && ((CH_W+1)'(f) == nf - 1'b1);

  logic base_last;   // current pair is the last of the block
  assign base_last = ((CH_W+1)'(cg) == ncg - 1'b1) && (s1 == ST_W'(NST - 1)) && (s2 == s1);

  assign blk_take  = (state == E_IDLE) && blk_valid;
  assign vis_valid = (state == E_OUT);
  assign vis_ch    = cg;
  assign vis_fs    = fs;
  assign vis_s1    = s1;
  assign vis_s2    = s2;
  assign vis_first = (cg == '0) && (s1 == '0);
  assign vis_last  = base_last;
  assign done_buf  = rd_buf;
  assign vis_part  = pass;
  assign blk_done  = vis_valid && vis_ready && base_last && (!hs || pass);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= E_IDLE;
      fs       <= '0;
      rd_buf   <= 1'b0;
      vis_sec  <= '0;
      cg       <= '0;
      f        <= '0;
      t        <= '0;
      s1       <= '0;
      s2       <= '0;
      v1       <= 1'b0;
      v1_first <= 1'b0;
      hs       <= 1'b0;
      pass     <= 1'b0;
      for (int k = 0; k < 4; k++) begin
        vis_re[k] <= '0;
        vis_im[k] <= '0;
      end
    end else begin
      // accumulate the product read in the previous clock
      v1       <= (state == E_RUN);
      v1_first <= (state == E_RUN) && (t == t_lo) && (f == '0);
      if (v1)
        for (int k = 0; k < 4; k++) begin
          vis_re[k] <= (v1_first ? '0 : vis_re[k]) + ACC_W'(pre[k]);
          vis_im[k] <= (v1_first ? '0 : vis_im[k]) + ACC_W'(pim[k]);
        end

      unique case (state)
        E_IDLE: if (blk_valid) begin
          state   <= E_RUN;
          rd_buf  <= blk_buf;
          vis_sec <= blk_sec;
          fs      <= fscrunch_log2;
          hs      <= half_sec;
          pass    <= 1'b0;
          cg      <= '0;
          s1      <= '0;
          s2      <= '0;
          t       <= '0;
          f       <= '0;
        end
        E_RUN: begin
          if (t == t_hi) begin
            t <= t_lo;
            f <= f + 1'b1;
          end else t <= t + 1'b1;
          if (issue_last) state <= E_WAIT;
        end
        E_WAIT: state <= E_OUT;
        E_OUT: if (vis_ready) begin
          t <= t_lo;
          f <= '0;
          if (base_last && hs && !pass) begin
            // second pass over the other half of the block
            state <= E_RUN;
            pass  <= 1'b1;
            t     <= T_W'(NT / 2);
            cg    <= '0;
            s1    <= '0;
            s2    <= '0;
          end else if (base_last) state <= E_IDLE;
          else begin
            state <= E_RUN;
            if (s2 == s1) begin
              s2 <= '0;
              if (s1 == ST_W'(NST - 1)) begin
                s1 <= '0;
                cg <= cg + 1'b1;
              end else s1 <= s1 + 1'b1;
            end else s2 <= s2 + 1'b1;
          end
        end
        default: state <= E_IDLE;
      endcase
    end
  end

  // each clock in E_RUN reads one pair; the engine never reads outside the block
  assert property (@(posedge clk) disable iff (!rst_n) state == E_RUN |-> s2 <= s1);
endmodule
