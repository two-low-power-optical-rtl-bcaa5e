// tb_locic_frame_builder: random header, payload and CRC; the registered
// word must hold the header in bits 0..7 at phase 0, the CRC (bit 15
// first) in bits 14..29 at phase 3 in data mode, and payload elsewhere.
`timescale 1ps / 1ps
module tb_locic_frame_builder;
  import locx2_pkg::*;
  `include "tb_check.svh"
  logic clk, rst, cal;
  phase_t phase, dout_phase;
  logic [7:0] hdr;
  word_t scr, dout, exp_w;
  logic [15:0] crc;
  locic_frame_builder dut (.clk, .rst, .phase, .cal, .hdr, .scr, .crc, .dout, .dout_phase);
  initial clk = 1'b0;
  always #5 clk = ~clk;
  initial begin
    rst = 1'b0; phase = '0; cal = 1'b0; hdr = '0; scr = '0; crc = '0;
    #1 rst = 1'b1; #20 rst = 1'b0;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      phase = phase_t'(i % 4); cal = (i >= 100);
      hdr = 8'($urandom); crc = 16'($urandom); scr = 30'($urandom);
      scr = scr & payload_mask(phase, cal);
      exp_w = scr;
      if (phase == 2'd0) exp_w[7:0] = hdr;
      if (phase == 2'd3 && !cal) for (int k = 0; k < 16; k++) exp_w[14 + k] = crc[15 - k];
      @(posedge clk); #1;
      check(dout == exp_w, "frame word");
      check(dout_phase == phase, "phase tag");
    end
    finish_tb();
  end
  initial begin #100000; failures++; $display("watchdog expired"); finish_tb(); end
endmodule
