// pfb_input_align: the input buffer of a PFB board, which lines up all of its
// receiver fibres on the one-second tick.
//
// Each fibre delivers one word per sample time with a flag that marks the first
// word of a second. Every fibre has a FIFO of P_DEPTH words. While hunting, a
// fibre discards words until its tick word arrives, and keeps that word at the
// head of its FIFO. When every fibre shows a tick at its head the buffer is
// aligned and from then on pops one word from every fibre together whenever all
// FIFOs hold a word, so output word n of every fibre belongs to the same sample.
// If a FIFO overflows (skew beyond the buffer) or the fibres' ticks stop
// coinciding, all FIFOs are flushed and hunting starts again. Aligning on the
// tick with a buffer of +/-8 samples follows the published design; the FIFO
// structure, the 16-word depth and the error handling are this design's choices.
// The receiver link framing is not published, so words are taken as P_W-bit
// values with a separate tick flag.
//
// Interface: per fibre in_data/in_tick on in_valid (no back-pressure); aligned
// words for all fibres out on out_valid with out_tick, one clock after the last
// fibre's word arrives.
module pfb_input_align
  import mwa_pkg::*;
#(
  parameter int unsigned P_NFIBRE = NFIBRE,
  parameter int unsigned P_DEPTH  = ALIGN_DEPTH,
  parameter int unsigned P_W      = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [P_W-1:0] in_data  [P_NFIBRE],
  input  logic           in_tick  [P_NFIBRE],
  input  logic           in_valid [P_NFIBRE],
  output logic [P_W-1:0] out_data [P_NFIBRE],
  output logic           out_tick,
  output logic           out_valid,
  output logic           aligned,
  output logic [15:0]    n_realign     // times alignment was lost and hunted again
);
  localparam int unsigned A_W = $clog2(P_DEPTH);

  logic [P_W:0]   fifo [P_NFIBRE][P_DEPTH];   // {tick, data}
  logic [A_W-1:0] wp [P_NFIBRE], rp [P_NFIBRE];
  logic [A_W:0]   cnt [P_NFIBRE];

  logic all_nonempty, all_tick_head, any_tick_head, overflow, pop, flush;

  always_comb begin
    all_nonempty  = 1'b1;
    all_tick_head = 1'b1;
    any_tick_head = 1'b0;
    overflow      = 1'b0;
    for (int i = 0; i < P_NFIBRE; i++) begin
      logic hd;
      hd = fifo[i][rp[i]][P_W] && (cnt[i] != 0);
      if (cnt[i] == 0) all_nonempty = 1'b0;
      if (!hd) all_tick_head = 1'b0;
      if (hd) any_tick_head = 1'b1;
      if (in_valid[i] && cnt[i] == (A_W+1)'(P_DEPTH)) overflow = 1'b1;
    end
    pop   = aligned && all_nonempty;
    // aligned fibres must show their ticks together
    flush = overflow || (pop && any_tick_head && !all_tick_head);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aligned   <= 1'b0;
      n_realign <= '0;
      out_valid <= 1'b0;
      out_tick  <= 1'b0;
      for (int i = 0; i < P_NFIBRE; i++) begin
        wp[i]       <= '0;
        rp[i]       <= '0;
        cnt[i]      <= '0;
        out_data[i] <= '0;
      end
    end else begin
      out_valid <= pop && !flush;
      out_tick  <= all_tick_head;
      if (flush) begin
        aligned   <= 1'b0;
        n_realign <= n_realign + 1'b1;
        for (int i = 0; i < P_NFIBRE; i++) begin
          wp[i]  <= '0;
          rp[i]  <= '0;
          cnt[i] <= '0;
        end
      end else begin
        if (!aligned && all_tick_head) aligned <= 1'b1;
        for (int i = 0; i < P_NFIBRE; i++) begin
          logic push, take;
          // while hunting, a fibre keeps nothing before its first tick
          push = in_valid[i] && (aligned || cnt[i] != 0 || in_tick[i]);
          take = pop;
          if (push) begin
            fifo[i][wp[i]] <= {in_tick[i], in_data[i]};
            wp[i] <= (wp[i] == A_W'(P_DEPTH - 1)) ? '0 : wp[i] + 1'b1;
          end
          if (take) begin
            out_data[i] <= fifo[i][rp[i]][P_W-1:0];
            rp[i] <= (rp[i] == A_W'(P_DEPTH - 1)) ? '0 : rp[i] + 1'b1;
          end
          cnt[i] <= cnt[i] + (A_W+1)'(push) - (A_W+1)'(take);
        end
      end
    end
  end
endmodule
