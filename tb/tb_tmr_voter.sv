// tb_tmr_voter: random words; with one copy corrupted the vote equals the
// two good copies; q follows y one clock later; mismatch flags disagreement.
`timescale 1ps / 1ps
module tb_tmr_voter;
  `include "tb_check.svh"
  logic clk, rst, mismatch;
  logic [29:0] a, b, c, y, q, exp_q;
  tmr_voter #(.W(30)) dut (.clk, .rst, .a, .b, .c, .y, .q, .mismatch);
  initial clk = 1'b0;
  always #5 clk = ~clk;
  initial begin
    logic [29:0] good;
    int which;
    rst = 1'b0; a = '0; b = '0; c = '0;
    #1 rst = 1'b1; #20 rst = 1'b0;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      good = 30'($urandom);
      which = i % 4;
      a = good; b = good; c = good;
      if (which == 1) a = 30'($urandom);
      if (which == 2) b = 30'($urandom);
      if (which == 3) c = 30'($urandom);
      #1 check(y == good, "vote with one bad copy");
      @(posedge clk); #1;
      check(q == good, "registered vote");
      check(mismatch == ((a != good) || (b != good) || (c != good)), "mismatch flag");
    end
    // three different words: bitwise majority
    @(negedge clk); a = 30'h0F0F0F0F; b = 30'h33333333; c = 30'h15555555;
    #1 check(y == ((a & b) | (a & c) | (b & c)), "bitwise majority");
    finish_tb();
  end
  initial begin #100000; failures++; $display("watchdog expired"); finish_tb(); end
endmodule
