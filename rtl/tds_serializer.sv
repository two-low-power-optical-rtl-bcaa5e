// tds_serializer: 30:1 serializer of one LOCx2-130 channel.
//
// Every 160 MHz word clock a 30-bit word is shifted out at 4.8 Gb/s, bit 0
// first. The serializer samples the word clock with its own bit clock; one
// bit clock after it sees the word clock go high it loads the word into the
// shift register (the word has been stable since that edge) and then shifts
// it out over the next 30 bit clocks, so its load point follows the word
// clock and no separate divider needs aligning. The paper's serializer is a
// full-custom circuit from the GBTX analog core running at 2.4 GHz on both
// edges; this is a single-edge logic equivalent. Latency from the word
// clock edge to the first bit on `ser`: about two bit periods.
`timescale 1ps / 1ps
module tds_serializer #(
  parameter int unsigned W = 30
) (
  input  logic         clk_bit,   // 4.8 GHz (PLL)
  input  logic         rst,
  input  logic         clk_word,  // 160 MHz word clock, = clk_bit / W
  input  logic [W-1:0] word,
  output logic         ser,
  output logic         load       // pulse when a word is loaded
);

  logic         wc_q1, wc_q2;
  logic [W-1:0] sreg;

  assign load = wc_q1 && !wc_q2;
  assign ser  = sreg[0];

  always_ff @(posedge clk_bit or posedge rst) begin
    if (rst) begin
      wc_q1 <= 1'b0;
      wc_q2 <= 1'b0;
      sreg  <= '0;
    end else begin
      wc_q1 <= clk_word;
      wc_q2 <= wc_q1;
      if (load) sreg <= word;
      else      sreg <= {1'b0, sreg[W-1:1]};
    end
  end

endmodule
