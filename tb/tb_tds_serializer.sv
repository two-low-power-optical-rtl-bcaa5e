// tb_tds_serializer: a 30-bit word per word clock (bit clock / 30) must
// leave bit 0 first, 30 bits per word with no gap, one load every 30 bit
// clocks; 4.8 Gb/s at a 160 MHz word clock.
`timescale 1ps / 1ps
module tb_tds_serializer;
  `include "tb_check.svh"
  logic clk_bit, rst, clk_word, ser, load;
  logic [29:0] word;
  tds_serializer #(.W(30)) dut (.clk_bit, .rst, .clk_word, .word, .ser, .load);

  // 4.8 GHz bit clock (208 ps, rounded), word clock toggled on its falling edges
  initial clk_bit = 1'b0;
  always #104 clk_bit = ~clk_bit;
  int bc = 0;
  always @(negedge clk_bit) begin
    bc = (bc + 1) % 30;
    if (bc == 0)  clk_word = 1'b1;
    if (bc == 15) clk_word = 1'b0;
  end

  logic [29:0] words [$];
  always @(posedge clk_word) begin
    word <= 30'($urandom);
    #1 words.push_back(word);
  end

  int nbits = 0, last_load = -1, nload = 0, cyc = 0;
  logic [29:0] cur;
  int wi = -1;
  always @(posedge clk_bit) begin
    cyc++;
    if (!rst) begin
      if (load) begin
        if (last_load >= 0) check(cyc - last_load == 30, "load every 30 bit clocks");
        last_load = cyc;
        nload++;
        wi = -1;
        for (int i = 0; i < words.size(); i++) if (words[i] == word) wi = i;
        cur = word;
        nbits = 0;
      end else if (wi >= 0 && nbits < 30) begin
        check(ser == cur[nbits], "serial bit order");
        nbits++;
      end
    end
  end

  initial begin
    rst = 1'b0; clk_word = 1'b0; word = '0;
    #1 rst = 1'b1; #2000 rst = 1'b0;
    #200_000;
    check(nload > 25, "words loaded");
    finish_tb();
  end
  initial begin #1_000_000; failures++; $display("watchdog expired"); finish_tb(); end
endmodule
