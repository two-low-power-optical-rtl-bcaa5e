// locic_scrambler_tmr: payload scrambler of the LOCic-130 encoder,
// triplicated internally.
//
// Self-synchronising scrambler x^58+x^39+1 (polynomial from the paper): each
// payload bit leaves as out(n) = in(n) ^ out(n-39) ^ out(n-58), the state
// being the last 58 scrambled bits. Header and CRC bits pass through
// unchanged and do not advance the state, so the state runs continuously
// over the payload bits of successive frames. A 30-bit word is processed
// per 160 MHz cycle.
//
// The scrambler has feedback and no reset, so, as the paper describes, it
// holds three copies of its state and a majority voter in front of every
// flip-flop: each copy loads the vote of the three next states, and a
// single upset is gone after one clock. The three inputs and outputs belong
// to the three encoder copies. Outputs are combinational.
`timescale 1ps / 1ps
module locic_scrambler_tmr
  import locx2_pkg::*;
(
  input  logic   clk,
  input  phase_t phase [3],
  input  logic   cal   [3],
  input  word_t  din   [3],
  output word_t  dout  [3]
);

  logic [SCR_LEN-1:0] st   [3];
  logic [SCR_LEN-1:0] nx   [3];
  logic [SCR_LEN-1:0] vote;

  always_comb begin
    for (int k = 0; k < 3; k++) begin
      word_t m;
      logic  b;
      b       = 1'b0;
      m       = payload_mask(phase[k], cal[k]);
      nx[k]   = st[k];
      dout[k] = din[k];
      for (int i = 0; i < int'(WORD_BITS); i++) begin
        if (m[i]) begin
          b          = scr_bit(nx[k], din[k][i]);
          dout[k][i] = b;
          nx[k]      = {nx[k][SCR_LEN-2:0], b};
        end
      end
    end
  end

  assign vote = SCR_LEN'(maj3(64'(nx[0]), 64'(nx[1]), 64'(nx[2])));

  // No reset (as in the paper): the descrambler resynchronises by itself.
  always_ff @(posedge clk) begin
    for (int k = 0; k < 3; k++) st[k] <= vote;
  end

endmodule
