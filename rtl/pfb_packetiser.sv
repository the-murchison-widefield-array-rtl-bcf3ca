// pfb_packetiser: frames the channelised output of one PFB output lane into
// lane packets.
//
// Each packet carries one time sample of NF2 adjacent fine channels for the NIN
// inputs of the board: NDATA = NF2*NIN/2 words of two 8-bit samples, channel
// slowest, input fastest, in the order the filterbank presents them. The module
// puts the 16'h0800 header and the two counter words in front and the XOR
// checksum of the data words behind. Packets of a lane cycle through the
// counters mgt_bank (slowest, 0..NBANK-1), mgt_channel (0..NCOARSE-1), mgt_group
// (0..NGROUP-1) and mgt_frame (fastest, 0..NFRAME-1); sec_tick is 1 only on the
// first packet of each second, when all counters are 0. These rules follow the
// published lane format; the counters starting at zero out of reset (reset is
// taken to be aligned to a second boundary) is this design's choice.
//
// Interface: sample words in on in_valid/in_ready; lane words out on
// lane_valid, one per cycle, with no back-pressure (a serial link cannot be
// stalled). in_ready is high only while a packet's data words are being sent,
// so a packet takes NDATA+4 cycles when data is always available.
module pfb_packetiser
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
  input  logic [1:0]  pfb_id,     // board number, fixed by wiring
  input  logic [2:0]  mgt_id,     // lane number on the board, fixed by wiring
  input  logic [15:0] in_data,
  input  logic        in_valid,
  output logic        in_ready,
  output logic [15:0] lane_data,
  output logic        lane_valid
);
  localparam int unsigned NDATA = P_NF2 * P_NIN / 2;

  typedef enum logic [2:0] {S_HDR, S_W1, S_W2, S_DATA, S_CSUM} state_t;
  state_t state;

  logic [WIDX_W-1:0] widx;
  logic [15:0]       csum;
  logic [4:0]        bank, chan;
  logic [1:0]        grp;
  logic [8:0]        frame;
  pkt_hdr_t          hdr;

  always_comb begin
    hdr.sec_tick    = (bank == 0) && (chan == 0) && (grp == 0) && (frame == 0);
    hdr.pfb_id      = pfb_id;
    hdr.mgt_id      = mgt_id;
    hdr.mgt_bank    = bank;
    hdr.mgt_channel = chan;
    hdr.mgt_group   = grp;
    hdr.mgt_frame   = frame;
  end

  assign in_ready = (state == S_DATA);

  always_comb begin
    lane_valid = 1'b0;
    lane_data  = '0;
    unique case (state)
      S_HDR:  begin lane_valid = in_valid; lane_data = PKT_HEADER;     end
      S_W1:   begin lane_valid = 1'b1;     lane_data = hdr_word1(hdr); end
      S_W2:   begin lane_valid = 1'b1;     lane_data = hdr_word2(hdr); end
      S_DATA: begin lane_valid = in_valid; lane_data = in_data;        end
      S_CSUM: begin lane_valid = 1'b1;     lane_data = csum;           end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_HDR;
      widx  <= '0;
      csum  <= '0;
      bank  <= '0;
      chan  <= '0;
      grp   <= '0;
      frame <= '0;
    end else begin
      unique case (state)
        S_HDR:  if (in_valid) state <= S_W1;   // start a packet only when data is waiting
        S_W1:   state <= S_W2;
        S_W2:   begin state <= S_DATA; widx <= '0; csum <= '0; end
        S_DATA: if (in_valid) begin
          csum <= csum ^ in_data;
          widx <= widx + 1'b1;
          if (widx == WIDX_W'(NDATA - 1)) state <= S_CSUM;
        end
        S_CSUM: begin
          state <= S_HDR;
          // advance the lane counters: frame fastest, bank slowest
          if (frame == 9'(P_NFRAME - 1)) begin
            frame <= '0;
            if (grp == 2'(P_NGROUP - 1)) begin
              grp <= '0;
              if (chan == 5'(P_NCOARSE - 1)) begin
                chan <= '0;
                bank <= (bank == 5'(P_NBANK - 1)) ? '0 : bank + 1'b1;
              end else chan <= chan + 1'b1;
            end else grp <= grp + 1'b1;
          end else frame <= frame + 1'b1;
        end
        default: state <= S_HDR;
      endcase
    end
  end
endmodule
