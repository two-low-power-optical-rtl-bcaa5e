// locx2_pkg: constants and bit-level helper functions shared by the LOCic-130
// encoder blocks and their testbenches.
//
// Frame (120 bits, one LHC bunch crossing of 25 ns at 4.8 Gb/s):
//   b0..b3    fixed 1010
//   b4..b5    two bits of a PRBS 2^5-1, b6..b7 two bits of a PRBS 2^7-1
//             (together the BCID field; both restart on a BCID reset)
//   b8..b103  96-bit payload (data mode), b104..b119 CRC-16
//   b8..b119  112-bit payload (calibration mode, no CRC)
// Payload bit j (j = 0 at b8) is bit (j % 8) of ADC word j/8; ADC word w
// holds one bit of each of the 8 channels, MSB words first.
// The frame layout, CRC and scrambler polynomials follow the paper; the PRBS
// polynomials, the seeds, the CRC initial value and all bit orders are this
// design's choices.
`timescale 1ps / 1ps
package locx2_pkg;

  localparam int unsigned FRAME_BITS   = 120;
  localparam int unsigned WORD_BITS    = 30;   // serializer word, 160 MHz
  localparam int unsigned WORDS_FRAME  = 4;    // 160 MHz / 40 MHz
  localparam int unsigned HDR_BITS     = 8;
  localparam int unsigned PAYLOAD_DATA = 96;
  localparam int unsigned PAYLOAD_CAL  = 112;
  localparam int unsigned CRC_BITS     = 16;
  localparam int unsigned NCH          = 8;    // ADC channels per encoder
  localparam int unsigned WORDS_DATA   = PAYLOAD_DATA / NCH;  // 12-bit samples
  localparam int unsigned WORDS_CAL    = PAYLOAD_CAL / NCH;   // 14-bit samples

  // x^16+x^14+x^12+x^11+x^9+x^8+x^7+x^4+x+1
  localparam logic [15:0] CRC_POLY = 16'h5B93;
  // x^58+x^39+1: out(n) = in(n) ^ out(n-39) ^ out(n-58)
  localparam int unsigned SCR_LEN  = 58;
  localparam int unsigned SCR_TAP  = 39;

  localparam logic [3:0] HDR_MAGIC = 4'b1010;  // b0..b3, b0 = 1
  localparam logic [4:0] PRBS5_SEED = 5'h1F;
  localparam logic [6:0] PRBS7_SEED = 7'h7F;
  localparam int unsigned BCID_PERIOD = 3564;

  typedef logic [WORD_BITS-1:0] word_t;
  typedef logic [1:0]           phase_t;

  // One step of the CRC LFSR (MSB first).
  function automatic logic [15:0] crc_step(input logic [15:0] c, input logic d);
    logic fb;
    fb = d ^ c[15];
    return {c[14:0], 1'b0} ^ (fb ? CRC_POLY : 16'h0000);
  endfunction

  // One bit through the self-synchronising scrambler. s[k] = out(n-1-k).
  function automatic logic scr_bit(input logic [SCR_LEN-1:0] s, input logic d);
    return d ^ s[SCR_TAP-1] ^ s[SCR_LEN-1];
  endfunction

  // PRBS 2^5-1, x^5+x^3+1, Fibonacci form; output is the MSB before the shift.
  function automatic logic [4:0] prbs5_next(input logic [4:0] s);
    return {s[3:0], s[4] ^ s[2]};
  endfunction
  // PRBS 2^7-1, x^7+x^6+1.
  function automatic logic [6:0] prbs7_next(input logic [6:0] s);
    return {s[5:0], s[6] ^ s[5]};
  endfunction

  // Bitwise 2-of-3 majority.
  function automatic logic [63:0] maj3(input logic [63:0] a, input logic [63:0] b,
                                       input logic [63:0] c);
    return (a & b) | (a & c) | (b & c);
  endfunction

  // Which bits of frame word k (phase) are payload.
  function automatic word_t payload_mask(input phase_t ph, input logic cal);
    word_t m;
    unique case (ph)
      2'd0:    m = {{(WORD_BITS-HDR_BITS){1'b1}}, {HDR_BITS{1'b0}}};
      2'd3:    m = cal ? '1 : {{CRC_BITS{1'b0}}, {(WORD_BITS-CRC_BITS){1'b1}}};
      default: m = '1;
    endcase
    return m;
  endfunction

endpackage
