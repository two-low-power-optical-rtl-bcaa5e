// adc_emu: testbench model of the ADCs feeding one encoder channel.
//
// Sends one sample of each of 8 channels per 25 ns frame on 8 serial lines,
// MSB first, with a data clock of bits_per_frame x 40 MHz (12 -> 480 MHz,
// 14 -> 560 MHz, 16 -> 640 MHz) and a frame clock that is high for the first
// half of each frame. Data change while SCK is low and are sampled on its
// rising edge. Samples are locic_ref_pkg::sample_val(frame, channel,
// sample_bits); bits beyond sample_bits are sent as 0. Frames are numbered
// from 0 after `start` rises; `frame_no` is the frame being sent.
`timescale 1ps / 1ps
module adc_emu #(
  parameter int unsigned FRAME_PS  = 25000,
  parameter int unsigned OFFSET_PS = 0
) (
  input  logic        start,
  input  int unsigned bits_per_frame,
  input  int unsigned sample_bits,
  output logic        sck,
  output logic        fck,
  output logic [7:0]  data,
  output int unsigned frame_no
);
  import locic_ref_pkg::*;

  initial begin
    int unsigned nb, sb;
    int unsigned t0, t1;
    sck = 1'b0; fck = 1'b0; data = '0; frame_no = 0;
    wait (start);
    #(OFFSET_PS);
    forever begin
      nb = bits_per_frame;
      sb = sample_bits;
      for (int unsigned b = 0; b < nb; b++) begin
        t0 = (b * FRAME_PS) / nb;
        t1 = ((b + 1) * FRAME_PS) / nb;
        for (int c = 0; c < 8; c++)
          data[c] = (b < sb) ? sample_val(frame_no, c, sb)[sb - 1 - b] : 1'b0;
        if (b == 0)      fck = 1'b1;
        if (b == nb / 2) fck = 1'b0;
        #((t1 - t0) / 2) sck = 1'b1;
        #((t1 - t0) - (t1 - t0) / 2) sck = 1'b0;
      end
      frame_no++;
    end
  end
endmodule
