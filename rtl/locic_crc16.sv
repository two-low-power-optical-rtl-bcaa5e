// locic_crc16: CRC generator of the LOCic-130 encoder.
//
// Computes the 16-bit CRC x^16+x^14+x^12+x^11+x^9+x^8+x^7+x^4+x+1 (paper)
// over the unscrambled payload of one frame, 30 bits per 160 MHz cycle. Only
// bits that are payload in the current frame word are fed in, in
// transmission order (word bit 0 first); at phase 0 the register starts from
// zero, so it is cleared every frame. The CRC of the whole 96-bit payload is
// on `crc` during phase 3, combinationally, so the frame builder can place it
// in b104..b119 in the same cycle. Initial value, bit order and the MSB-first
// LFSR form are this design's choices.
`timescale 1ps / 1ps
module locic_crc16
  import locx2_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  phase_t      phase,
  input  logic        cal,
  input  word_t       din,     // unscrambled payload slice
  output logic [15:0] crc
);

  logic [15:0] crc_q;
  word_t       m;

  assign m = payload_mask(phase, cal);

  always_comb begin
    crc = (phase == 2'd0) ? 16'h0000 : crc_q;
    for (int i = 0; i < int'(WORD_BITS); i++)
      if (m[i]) crc = crc_step(crc, din[i]);
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) crc_q <= '0;
    else     crc_q <= crc;
  end

endmodule
