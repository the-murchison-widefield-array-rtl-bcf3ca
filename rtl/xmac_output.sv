// xmac_output: packages each integration for the archive.
//
// For every visibility set the engine produces, one record is sent: a two-word
// header carrying the time tag (the UTC-second label of the block in bits 15:0,
// and in bit 16 which half of the second a half-second set covers) and the number of
// visibility words that follow, then every visibility as 32-bit IEEE floats in
// the engine's order (channel, s1, s2, p1, p2, real then imaginary), then zero
// words until the record length is a whole number of 2880-byte FITS blocks
// (720 words). Float output, the triangular order, a time-tagged header and
// padding to the FITS block size follow the published design; the header holds
// only the time tag and length, not the FITS text cards, which is this design's
// simplification.
//
// A visibility is copied into a holding register when it is accepted, so the
// engine can compute the next one while the eight words of this one are sent:
// with the archive always ready, one visibility leaves every eight cycles, or at
// the engine's rate if that is slower.
//
// Interface: visibilities in on vis_valid/vis_ready; words out on
// out_valid/out_ready with out_sop on the first header word and out_eop on the
// last padding word of a record. The header is taken from the first visibility
// of the record while it waits to be accepted.
module xmac_output
  import mwa_pkg::*;
#(
  parameter int unsigned P_NST = NPFB * NIN / 2,
  parameter int unsigned P_NCH = NMGT * NGROUP * NF2,
  parameter int unsigned ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [ACC_W-1:0] vis_re [4],
  input  logic signed [ACC_W-1:0] vis_im [4],
  input  logic [SEC_W-1:0]        vis_sec,
  input  logic [1:0]              vis_fs,
  input  logic                    vis_part,
  input  logic                    vis_last,
  input  logic                    vis_valid,
  output logic                    vis_ready,
  output logic [31:0]             out_data,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic                    out_sop,
  output logic                    out_eop
);
  localparam int unsigned FITS_WORDS = 2880 / 4;
  localparam int unsigned NBASE      = P_NST * (P_NST + 1) / 2;

  typedef enum logic [2:0] {O_IDLE, O_H0, O_H1, O_DATA, O_PAD} ostate_t;
  ostate_t state;

  logic [2:0]  k;          // component of the current visibility
  logic [31:0] wc;         // words already sent in this record
  logic [31:0] fl;
  logic signed [ACC_W-1:0] comp;
  logic        aligned_next;  // the word now being sent completes a FITS block
  logic signed [ACC_W-1:0] h_re [4], h_im [4];   // visibility being sent
  logic        h_last, have;

  assign comp = k[0] ? h_im[k[2:1]] : h_re[k[2:1]];
  int_to_float u_cvt (.in_int(32'(comp)), .out_float(fl));

  assign aligned_next = ((wc + 1) % FITS_WORDS) == 0;

  always_comb begin
    out_valid = 1'b0;
    out_data  = '0;
    out_sop   = 1'b0;
    out_eop   = 1'b0;
    vis_ready = 1'b0;
    unique case (state)
      O_IDLE: ;
      O_H0: begin out_valid = 1'b1; out_sop = 1'b1; out_data = 32'({vis_part, vis_sec}); end
      O_H1: begin out_valid = 1'b1; out_data = 32'((P_NCH >> vis_fs) * NBASE * 8); end
      O_DATA: begin
        out_valid = have;
        out_data  = fl;
        vis_ready = !have || (out_ready && (k == 3'd7) && !h_last);
        out_eop   = have && (k == 3'd7) && h_last && aligned_next;
      end
      O_PAD: begin out_valid = 1'b1; out_eop = aligned_next; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= O_IDLE;
      k         <= '0;
      wc        <= '0;
      have      <= 1'b0;
      h_last    <= 1'b0;
      for (int i = 0; i < 4; i++) begin h_re[i] <= '0; h_im[i] <= '0; end
    end else begin
      if (vis_valid && vis_ready) begin
        have   <= 1'b1;
        h_re   <= vis_re;
        h_im   <= vis_im;
        h_last <= vis_last;
      end else if (have && out_ready && k == 3'd7) begin
        have <= 1'b0;
      end
      if (out_valid && out_ready) wc <= out_eop ? '0 : wc + 1;
      unique case (state)
        O_IDLE: if (vis_valid) state <= O_H0;
        O_H0:   if (out_ready) state <= O_H1;
        O_H1:   if (out_ready) begin state <= O_DATA; k <= '0; end
        O_DATA: if (have && out_ready) begin
          k <= k + 1'b1;
          if (k == 3'd7 && h_last) state <= aligned_next ? O_IDLE : O_PAD;
        end
        O_PAD:  if (out_ready && aligned_next) state <= O_IDLE;
        default: state <= O_IDLE;
      endcase
    end
  end
endmodule
