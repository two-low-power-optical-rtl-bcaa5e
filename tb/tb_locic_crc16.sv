// tb_locic_crc16: random 96-bit payloads fed as the four frame slices;
// the CRC during phase 3 must equal the remainder computed by polynomial
// long division in the reference model; bits outside the payload mask
// must not change it.
`timescale 1ps / 1ps
module tb_locic_crc16;
  import locx2_pkg::*;
  import locic_ref_pkg::*;
  `include "tb_check.svh"
  logic clk, rst, cal;
  phase_t phase;
  word_t din;
  logic [15:0] crc;
  locic_crc16 dut (.clk, .rst, .phase, .cal, .din, .crc);
  initial clk = 1'b0;
  always #5 clk = ~clk;
  initial begin
    logic [111:0] p;
    logic [119:0] f;
    rst = 1'b0; phase = '0; cal = 1'b0; din = '0;
    #1 rst = 1'b1; #20 rst = 1'b0;
    for (int n = 0; n < 100; n++) begin
      p = {$urandom, $urandom, $urandom, $urandom};
      p[111:96] = '0;
      // frame with random junk in header and CRC field
      f = {$urandom, $urandom, $urandom, $urandom};
      f[103:8] = p[95:0];
      for (int ph = 0; ph < 4; ph++) begin
        @(negedge clk);
        phase = phase_t'(ph);
        din = f[30*ph +: 30];
        if (ph == 3) #1 check(crc == ref_crc(p, 96), "CRC of payload");
      end
    end
    finish_tb();
  end
  initial begin #100000; failures++; $display("watchdog expired"); finish_tb(); end
endmodule
