// locic_frame_builder: frame builder of the LOCic-130 encoder.
//
// Puts together each 30-bit serializer word of the 120-bit frame: at phase
// 0 the header in bits 0..7 and scrambled payload in bits 8..29; at phases
// 1 and 2 payload only; at phase 3 payload in bits 0..13 and the CRC in
// bits 14..29 (CRC bit 15 first), or payload only in calibration mode. Word
// k of a frame is frame bits b(30k)..b(30k+29). The output is registered:
// one 160 MHz cycle of latency. The frame layout is the paper's; the word
// bit order (bit 0 leaves the serializer first) is this design's choice.
`timescale 1ps / 1ps
module locic_frame_builder
  import locx2_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  phase_t      phase,
  input  logic        cal,
  input  logic [7:0]  hdr,
  input  word_t       scr,      // scrambled payload, 0 outside payload bits
  input  logic [15:0] crc,
  output word_t       dout,
  output phase_t      dout_phase
);

  word_t w;

  always_comb begin
    w = scr;
    if (phase == 2'd0) w[HDR_BITS-1:0] = hdr;
    if (phase == 2'd3 && !cal)
      for (int k = 0; k < int'(CRC_BITS); k++) w[14+k] = crc[15-k];
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      dout       <= '0;
      dout_phase <= '0;
    end else begin
      dout       <= w;
      dout_phase <= phase;
    end
  end

endmodule
