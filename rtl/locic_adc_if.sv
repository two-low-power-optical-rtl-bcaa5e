// locic_adc_if: ADC interface of one LOCic-130 encoder.
//
// The encoder is fed by two 4-channel ADCs (or one 8-channel ADC): eight
// serial data lines, a data clock SCK and a 40 MHz frame clock FCK. Every
// rising SCK edge the eight lines are sampled together, giving one 8-bit
// word that holds the same bit of all eight channels (bit c = channel c).
// A rising FCK edge seen on SCK marks the first (most significant) bit of a
// new sample. From then on the first 12 words (data mode, 12-bit samples) or
// 14 words (calibration mode, 14-bit samples) are written into the FIFO;
// further words of a longer ADC word (16 bits at 640 MHz) are dropped.
//
// Interface: wr_en/wr_data are registered and change on the rising SCK edge,
// one cycle after the bits were on din. cal_mode is a quasi-static setting.
// The paper gives the unified 8-bit output and the three ADC clock rates;
// SDR sampling, MSB-first order and the frame-edge rule are this design's.
`timescale 1ps / 1ps
module locic_adc_if
  import locx2_pkg::*;
#(
  parameter int unsigned NCH_P = NCH
) (
  input  logic             sck,
  input  logic             rst,       // asynchronous, active high
  input  logic             fck,
  input  logic [NCH_P-1:0] din,
  input  logic             cal_mode,
  output logic             wr_en,
  output logic [NCH_P-1:0] wr_data,
  output logic             frame_start  // pulse with the first word of a frame
);

  logic       fck_q;
  logic [4:0] cnt;        // words written in this frame
  logic [4:0] nwords;

  assign nwords = cal_mode ? 5'(WORDS_CAL) : 5'(WORDS_DATA);

  always_ff @(posedge sck or posedge rst) begin
    if (rst) begin
      fck_q       <= 1'b1;
      cnt         <= 5'd31;
      wr_en       <= 1'b0;
      wr_data     <= '0;
      frame_start <= 1'b0;
    end else begin
      fck_q       <= fck;
      wr_data     <= din;
      frame_start <= 1'b0;
      if (fck && !fck_q) begin
        cnt         <= 5'd1;
        wr_en       <= 1'b1;
        frame_start <= 1'b1;
      end else if (cnt < nwords) begin
        cnt   <= cnt + 5'd1;
        wr_en <= 1'b1;
      end else begin
        wr_en <= 1'b0;
      end
    end
  end

endmodule
