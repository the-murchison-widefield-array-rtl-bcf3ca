// vcs_capture: receives one PFB output lane, checks each packet and keeps the
// lane synchronised to the one-second tick.
//
// A receive state machine hunts for the 16'h0800 header word, stores the two
// counter words and the NDATA data words into one of two packet slots and
// compares the XOR of the data words with the trailing checksum. A packet is
// passed on only if its checksum is good and the lane is synchronised: a packet
// with sec_tick set (and all counters zero) synchronises the lane, and a packet
// whose counters are not the successor of the previous good packet's counters,
// a bad checksum, or a packet lost because both slots were full, each drop the
// lane out of synchronisation until the next tick. Packets are labelled with the
// UTC second they belong to; the label advances whenever a good packet's position
// in the second (bank, channel, group, frame) is not after the previous one's,
// which is the case for a tick packet and still works if the tick packet itself
// was lost. Integrity checking, packet alignment and tick synchronisation are
// described for the capture hosts; the two-slot buffer, the drop rules and the
// second-labelling rule are this design's choices.
//
// Interface: lane words in on lane_valid (no back-pressure); checked data words
// out on out_valid/out_ready, one word per cycle, each carrying the decoded
// header, the second label and its index. A packet is forwarded after its
// checksum word has arrived (store and forward, NDATA+4 cycles of latency).
module vcs_capture
  import mwa_pkg::*;
#(
  parameter int unsigned P_NIN     = NIN,
  parameter int unsigned P_NF2     = NF2,
  parameter int unsigned P_NGROUP  = NGROUP,
  parameter int unsigned P_NCOARSE = NCOARSE,
  parameter int unsigned P_NFRAME  = NFRAME,
  parameter int unsigned P_NBANK   = NBANK
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] lane_data,
  input  logic        lane_valid,
  output vcs_word_t   out_word,
  output logic        out_valid,
  input  logic        out_ready,
  output logic        synced,
  output logic [15:0] n_good,       // packets forwarded
  output logic [15:0] n_csum_err,   // packets with a bad checksum
  output logic [15:0] n_seq_err,    // packets out of sequence while synchronised
  output logic [15:0] n_unsync,     // good packets dropped while not synchronised
  output logic [15:0] n_overflow    // packets lost because both slots were full
);
  localparam int unsigned NDATA = P_NF2 * P_NIN / 2;
  localparam int unsigned A_W   = $clog2(NDATA);

  typedef enum logic [2:0] {R_HUNT, R_W1, R_W2, R_DATA, R_CSUM, R_SKIP} rstate_t;
  rstate_t rstate;

  logic [15:0]       mem [2][NDATA];
  pkt_hdr_t          slot_hdr [2];
  logic [SEC_W-1:0]  slot_sec [2];
  logic              wr_ptr, rd_ptr;
  logic [1:0]        count;
  logic [WIDX_W-1:0] widx, ridx;
  logic [15:0]       w1, csum;
  pkt_hdr_t          hdr;
  logic [20:0]       pos, last_pos, exp_pos;
  logic              have_last;
  logic [SEC_W-1:0]  cur_sec;

  // position of a packet within its second: bank, channel, group, frame
  function automatic logic [20:0] pos_of(pkt_hdr_t h);
    return {h.mgt_bank, h.mgt_channel, h.mgt_group, h.mgt_frame};
  endfunction

  function automatic logic [20:0] pos_next(logic [20:0] p);
    logic [4:0] b, c; logic [1:0] g; logic [8:0] f;
    {b, c, g, f} = p;
    if (f == 9'(P_NFRAME - 1)) begin
      f = '0;
      if (g == 2'(P_NGROUP - 1)) begin
        g = '0;
        if (c == 5'(P_NCOARSE - 1)) begin
          c = '0;
          b = (b == 5'(P_NBANK - 1)) ? '0 : b + 1'b1;
        end else c = c + 1'b1;
      end else g = g + 1'b1;
    end else f = f + 1'b1;
    return {b, c, g, f};
  endfunction

  assign pos = pos_of(hdr);

  // ---------------- receive side ----------------
  logic commit, release_slot;
  logic new_sec;
  assign new_sec = !have_last || (pos <= last_pos);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rstate     <= R_HUNT;
      widx       <= '0;
      w1         <= '0;
      csum       <= '0;
      hdr        <= '0;
      synced     <= 1'b0;
      have_last  <= 1'b0;
      last_pos   <= '0;
      exp_pos    <= '0;
      cur_sec    <= '0;
      wr_ptr     <= 1'b0;
      n_good     <= '0;
      n_csum_err <= '0;
      n_seq_err  <= '0;
      n_unsync   <= '0;
      n_overflow <= '0;
    end else if (lane_valid) begin
      unique case (rstate)
        R_HUNT: if (lane_data == PKT_HEADER) rstate <= R_W1;
        R_W1:   begin w1 <= lane_data; rstate <= R_W2; end
        R_W2: begin
          hdr  <= hdr_decode(w1, lane_data);
          widx <= '0;
          csum <= '0;
          if (count < 2'd2 || release_slot) rstate <= R_DATA;
          else begin
            // no free slot: the packet is lost and the lane loses synchronisation
            rstate     <= R_SKIP;
            synced     <= 1'b0;
            n_overflow <= n_overflow + 1'b1;
          end
        end
        R_DATA: begin
          csum <= csum ^ lane_data;
          widx <= widx + 1'b1;
          if (widx == WIDX_W'(NDATA - 1)) rstate <= R_CSUM;
        end
        R_SKIP: begin
          widx <= widx + 1'b1;
          if (widx == WIDX_W'(NDATA)) rstate <= R_HUNT;   // data words and checksum
        end
        R_CSUM: begin
          rstate <= R_HUNT;
          if (csum != lane_data) begin
            n_csum_err <= n_csum_err + 1'b1;
            synced     <= 1'b0;
          end else begin
            have_last <= 1'b1;
            last_pos  <= pos;
            exp_pos   <= pos_next(pos);
            if (new_sec) cur_sec <= cur_sec + 1'b1;
            if (hdr.sec_tick && pos == '0) begin
              synced <= 1'b1;
              wr_ptr <= ~wr_ptr;
              n_good <= n_good + 1'b1;
            end else if (synced && pos != exp_pos) begin
              synced    <= 1'b0;
              n_seq_err <= n_seq_err + 1'b1;
            end else if (synced) begin
              wr_ptr <= ~wr_ptr;
              n_good <= n_good + 1'b1;
            end else begin
              n_unsync <= n_unsync + 1'b1;
            end
          end
        end
        default: rstate <= R_HUNT;
      endcase
    end
  end

  assign commit = lane_valid && (rstate == R_CSUM) && (csum == lane_data) &&
                  ((hdr.sec_tick && pos == '0) || (synced && pos == exp_pos));

  always_ff @(posedge clk) begin
    if (lane_valid && rstate == R_DATA) mem[wr_ptr][A_W'(widx)] <= lane_data;
    if (commit) begin
      slot_hdr[wr_ptr] <= hdr;
      slot_sec[wr_ptr] <= new_sec ? cur_sec + 1'b1 : cur_sec;
    end
  end

  // ---------------- send side ----------------
  assign out_valid          = (count != 0);
  assign out_word.hdr       = slot_hdr[rd_ptr];
  assign out_word.sec       = slot_sec[rd_ptr];
  assign out_word.widx      = ridx;
  assign out_word.last      = (ridx == WIDX_W'(NDATA - 1));
  assign out_word.data      = mem[rd_ptr][A_W'(ridx)];
  assign release_slot       = out_valid && out_ready && out_word.last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= 1'b0;
      ridx   <= '0;
      count  <= '0;
    end else begin
      if (out_valid && out_ready) begin
        ridx <= out_word.last ? '0 : ridx + 1'b1;
        if (out_word.last) rd_ptr <= ~rd_ptr;
      end
      count <= count + 2'(commit) - 2'(release_slot);
    end
  end

  // a committed packet must always find a free slot
  assert property (@(posedge clk) disable iff (!rst_n) commit |-> (count < 2'd2 || release_slot));
endmodule
