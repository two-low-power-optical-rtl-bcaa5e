// tb_locic_adc_if: frames of 12 bits (data mode) and 16 bits with 14 kept
// (calibration mode); each written word must be the 8 lines sampled on one
// SCK edge, MSB first, with frame_start on the first word, and exactly 12
// or 14 words per frame.
`timescale 1ps / 1ps
module tb_locic_adc_if;
  `include "tb_check.svh"
  logic sck, rst, fck, cal_mode, wr_en, frame_start;
  logic [7:0] din, wr_data;
  locic_adc_if dut (.sck, .rst, .fck, .din, .cal_mode, .wr_en, .wr_data, .frame_start);

  logic [7:0] sent [$];
  int nw = 0, nsof = 0;
  bit started = 0;
  always @(negedge sck) begin
    if (started && wr_en) begin
      if (frame_start) begin
        nsof++;
        check(nw == 0 || nw == (cal_mode && nsof > 11 ? 14 : 12), "words in previous frame");
        nw = 0;
      end
      check(sent.size() > nw && wr_data == sent[nw], "word value and order");
      nw++;
    end
  end

  task automatic send_frame(input int nbits);
    #1 sent.delete();
    for (int b = 0; b < nbits; b++) sent.push_back(8'($urandom));
    for (int b = 0; b < nbits; b++) begin
      #1 din = sent[b]; fck = (b < nbits / 2);
      #4 sck = 1'b1;
      #5 sck = 1'b0;
    end
  endtask

  initial begin
    rst = 1'b0; sck = 1'b0; fck = 1'b0; din = '0; cal_mode = 1'b0;
    #1 rst = 1'b1; #20 rst = 1'b0; started = 1;
    repeat (3) begin #1 sck = 1'b1; #5 sck = 1'b0; end
    for (int f = 0; f < 10; f++) send_frame(12);
    check(nsof == 10, "10 data-mode frames");
    cal_mode = 1'b1;
    for (int f = 0; f < 10; f++) send_frame(16);
    check(nsof == 20, "10 calibration frames");
    send_frame(2);
    #2 check(nw == 2, "short frame: only the words sent");
    finish_tb();
  end
  initial begin #100000; failures++; $display("watchdog expired"); finish_tb(); end
endmodule
