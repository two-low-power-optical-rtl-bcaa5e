// locic_frame_header: frame header generator of the LOCic-130 encoder.
//
// The 8-bit header is b0..b3 = 1010, then two bits of a PRBS 2^5-1 (b4, b5)
// and two bits of a PRBS 2^7-1 (b6, b7); this layout is the paper's. Both
// generators advance two bits per frame, so their periods are 31 and 127
// frames and the pair repeats only after 3937 frames, more than the 3564
// bunch crossings of an LHC orbit: a receiver that has seen a few headers
// knows the bunch-crossing number (BCID). A rising edge of bcid_rst (already
// in the 160 MHz domain) is remembered until the next frame start; that
// frame carries the seed bits and is BCID 0. Polynomials (x^5+x^3+1,
// x^7+x^6+1) and the all-ones seeds are this design's choice.
//
// hdr is combinational and valid while phase == 0; hdr[i] is frame bit b_i.
`timescale 1ps / 1ps
module locic_frame_header
  import locx2_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  phase_t     phase,
  input  logic       bcid_rst,
  output logic [7:0] hdr,
  output logic       bcid_zero    // pulse at phase 0 of a BCID-0 frame
);

  logic [4:0] p5_q, p5_c, p5_1;
  logic [6:0] p7_q, p7_c, p7_1;
  logic       bcid_q, pending, restart;

  assign restart = pending || (bcid_rst && !bcid_q);
  assign p5_c    = restart ? PRBS5_SEED : p5_q;
  assign p7_c    = restart ? PRBS7_SEED : p7_q;
  assign p5_1    = prbs5_next(p5_c);
  assign p7_1    = prbs7_next(p7_c);
  assign hdr     = {p7_1[6], p7_c[6], p5_1[4], p5_c[4], HDR_MAGIC[0], HDR_MAGIC[1],
                    HDR_MAGIC[2], HDR_MAGIC[3]};
  assign bcid_zero = (phase == 2'd0) && restart;

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      p5_q    <= PRBS5_SEED;
      p7_q    <= PRBS7_SEED;
      bcid_q  <= 1'b0;
      pending <= 1'b0;
    end else begin
      bcid_q <= bcid_rst;
      if (phase == 2'd0) begin
        p5_q    <= prbs5_next(p5_1);
        p7_q    <= prbs7_next(p7_1);
        pending <= 1'b0;
      end else if (bcid_rst && !bcid_q) begin
        pending <= 1'b1;
      end
    end
  end

endmodule
