// tb_locic_frame_header: the header of every frame must be 1010 followed
// by the PRBS 2^5-1 and 2^7-1 bit pairs counted from the last BCID reset,
// as generated by the reference recurrences; a BCID reset arriving in
// mid-frame takes effect at the next frame, which carries BCID 0. A full
// LHC orbit of 3564 frames is run between two resets.
`timescale 1ps / 1ps
module tb_locic_frame_header;
  import locx2_pkg::*;
  import locic_ref_pkg::*;
  `include "tb_check.svh"
  logic clk, rst, bcid_rst, bcid_zero;
  phase_t phase;
  logic [7:0] hdr;
  locic_frame_header dut (.clk, .rst, .phase, .bcid_rst, .hdr, .bcid_zero);
  initial clk = 1'b0;
  always #5 clk = ~clk;
  int f = -1, nzero = 0;
  always @(posedge clk) begin
    if (!rst && phase == 2'd0) begin
      if (bcid_zero) begin f = 0; nzero++; end
      else if (f >= 0) f++;
      if (f >= 0) check(hdr == ref_header(f), "header bits");
      else        check(hdr[3:0] == 4'b0101, "1010 pattern");
    end
  end
  always @(negedge clk or posedge rst)
    if (rst) phase <= '0; else phase <= phase + 2'd1;
  initial begin
    rst = 1'b0; bcid_rst = 1'b0;
    #1 rst = 1'b1; #20 rst = 1'b0;
    repeat (37) @(posedge clk);
    for (int r = 0; r < 3; r++) begin
      @(posedge clk); #1 bcid_rst = 1'b1;
      repeat (4) @(posedge clk); #1 bcid_rst = 1'b0;
      repeat (r == 1 ? 4 * 3564 - 4 : 400 + 3 * r) @(posedge clk);
    end
    check(nzero == 3, "three BCID-0 frames");
    finish_tb();
  end
  initial begin #1_000_000; failures++; $display("watchdog expired"); finish_tb(); end
endmodule
