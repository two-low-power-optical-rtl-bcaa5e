// tb_locic_fifo: 12-word frames are written at about 480 MHz and read as
// four 30-bit slices per 25 ns frame on a 160 MHz clock. Every frame read
// must be a frame written, in order, with its bits at the right frame
// positions and nothing outside the payload. Start-up underflow must be
// seen; with the reader held (no phase 0) the FIFO must report overflow.
`timescale 1ps / 1ps
module tb_locic_fifo;
  import locx2_pkg::*;
  `include "tb_check.svh"
  logic rst, wclk, rclk, wr_en, wr_sof, overflow, rd_valid, rd_cal, underflow;
  logic [7:0] wr_data;
  phase_t phase, rd_phase;
  word_t rd_data;
  logic hold;

  locic_fifo dut (
    .rst, .wclk, .wr_en, .wr_data, .wr_sof, .overflow,
    .rclk, .phase, .cal_mode(1'b0), .rd_data, .rd_valid, .rd_phase, .rd_cal, .underflow
  );

  initial begin wclk = 1'b0; forever #1042 wclk = ~wclk; end
  initial begin rclk = 1'b0; forever #3125 rclk = ~rclk; end
  always @(posedge rclk or posedge rst)
    if (rst) phase <= '0;
    else if (!hold || phase != 2'd1) phase <= phase + 2'd1;

  // writer
  logic [95:0] frames [$];
  bit wstart = 0;
  initial begin
    logic [95:0] f;
    wr_en = 1'b0; wr_sof = 1'b0; wr_data = '0;
    wait (wstart);
    forever begin
      for (int k = 0; k < 3; k++) f[32*k +: 32] = $urandom;
      frames.push_back(f);
      for (int w = 0; w < 12; w++) begin
        @(negedge wclk);
        wr_en = 1'b1; wr_sof = (w == 0); wr_data = f[8*w +: 8];
      end
    end
  end

  // reader
  logic [119:0] fr;
  int nread = 0, last = -1, n_unf = 0, n_ovf = 0;
  always @(posedge rclk) begin
    if (!rst) begin
      if (underflow) n_unf++;
      if (overflow) n_ovf++;
      if (rd_valid) begin
        fr[30*rd_phase +: 30] = rd_data;
        if (rd_phase == 2'd3) begin
          int idx;
          idx = -1;
          for (int i = last + 1; i < frames.size(); i++)
            if (frames[i] == fr[103:8]) begin idx = i; break; end
          check(idx >= 0, "frame read was written, in order");
          check(fr[7:0] == '0 && fr[119:104] == '0, "nothing outside the payload");
          if (idx >= 0) last = idx;
          nread++;
        end
      end
    end
  end
  always @(posedge wclk) if (overflow) n_ovf++;

  initial begin
    rst = 1'b0; hold = 1'b0;
    #1000 rst = 1'b1; #10000 rst = 1'b0;
    #20000 wstart = 1;
    #2_000_000;
    check(nread > 70, "frames read");
    check(n_unf > 0, "start-up underflow");
    check(n_ovf == 0, "no overflow while reading");
    check(last >= int'(frames.size()) - 4, "reader keeps up");
    hold = 1'b1;
    #500_000;
    check(n_ovf > 0, "overflow when the reader stops");
    $display("frames read %0d, underflows %0d, overflows %0d", nread, n_unf, n_ovf);
    finish_tb();
  end
  initial begin #5_000_000; failures++; $display("watchdog expired"); finish_tb(); end
endmodule
