// tb_locx2_pkg: checks the shared frame constants and helper functions:
// CRC-16 against values computed by polynomial division, payload masks
// (22+30+30+14 = 96 data-mode bits, 112 in calibration mode), PRBS
// periods 31 and 127, majority vote and the scrambler taps.
`timescale 1ps / 1ps
module tb_locx2_pkg;
  import locx2_pkg::*;
  `include "tb_check.svh"

  initial begin
    logic [15:0] c;
    logic [4:0]  p5;
    logic [6:0]  p7;
    int          n, tot;
    logic [47:0] pat;
    logic [57:0] s;
    pat = 48'hA5C3F00F1234;
    c = '0;
    for (int i = 0; i < 96; i++) c = crc_step(c, pat[i % 48]);
    check(c == 16'hAE32, "CRC of pattern");
    c = '0;
    for (int i = 0; i < 96; i++) c = crc_step(c, i == 0);
    check(c == 16'hE74A, "CRC of single one");
    // masks
    tot = 0;
    for (int p = 0; p < 4; p++) tot += $countones(payload_mask(phase_t'(p), 1'b0));
    check(tot == int'(PAYLOAD_DATA), "data-mode payload bits");
    check($countones(payload_mask(2'd0, 1'b0)) == 22, "phase 0 payload bits");
    check($countones(payload_mask(2'd3, 1'b0)) == 14, "phase 3 payload bits");
    tot = 0;
    for (int p = 0; p < 4; p++) tot += $countones(payload_mask(phase_t'(p), 1'b1));
    check(tot == int'(PAYLOAD_CAL), "calibration payload bits");
    // PRBS periods
    p5 = PRBS5_SEED; n = 0;
    do begin p5 = prbs5_next(p5); n++; end while (p5 != PRBS5_SEED && n < 1000);
    check(n == 31, "PRBS5 period");
    p7 = PRBS7_SEED; n = 0;
    do begin p7 = prbs7_next(p7); n++; end while (p7 != PRBS7_SEED && n < 1000);
    check(n == 127, "PRBS7 period");
    check(maj3(64'hF0, 64'hCC, 64'hAA) == 64'hE8, "majority");
    s = '0;
    check(scr_bit(s, 1'b1) == 1'b1, "scrambler zero state");
    s = 58'd1 << 38;
    check(scr_bit(s, 1'b0) == 1'b1, "scrambler tap 39");
    s = 58'd1 << 57;
    check(scr_bit(s, 1'b1) == 1'b0, "scrambler tap 58");
    s = 58'd1 << 20;
    check(scr_bit(s, 1'b0) == 1'b0, "no other tap");
    finish_tb();
  end
endmodule
