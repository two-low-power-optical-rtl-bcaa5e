// tb_locic_scrambler_tmr: random frames go through the scrambler; a
// reference descrambler must recover the payload (after its 58-bit start),
// header and CRC bits must pass unchanged, and the three copies must agree.
// Then copy 2 gets a wrong input for one cycle: copies 0 and 1 must not be
// affected, and copy 2 must agree with them again from the next cycle on,
// because its state is reloaded from the vote.
`timescale 1ps / 1ps
module tb_locic_scrambler_tmr;
  import locx2_pkg::*;
  import locic_ref_pkg::*;
  `include "tb_check.svh"
  logic clk;
  phase_t phase [3];
  logic   cal [3];
  word_t  din [3], dout [3];
  locic_scrambler_tmr dut (.clk, .phase, .cal, .din, .dout);
  initial clk = 1'b0;
  always #5 clk = ~clk;

  locic_decoder dec = new();

  initial begin
    logic [119:0] f, s;
    logic [111:0] p;
    bit insync;
    int n_sync = 0;
    for (int k = 0; k < 3; k++) begin phase[k] = '0; cal[k] = 1'b0; din[k] = '0; end
    for (int n = 0; n < 60; n++) begin
      f = {$urandom, $urandom, $urandom, $urandom};
      for (int ph = 0; ph < 4; ph++) begin
        @(negedge clk);
        for (int k = 0; k < 3; k++) begin phase[k] = phase_t'(ph); din[k] = f[30*ph +: 30]; end
        if (n == 40 && ph == 1) din[2] = ~din[2];
        #1;
        if (n == 40 && ph == 1) begin
          check(dout[0] == dout[1], "good copies agree during upset");
          check(dout[2] != dout[0], "upset copy differs");
        end else begin
          check(dout[0] == dout[1] && dout[0] == dout[2], "three copies agree");
        end
        s[30*ph +: 30] = dout[0];
      end
      check(s[7:0] == f[7:0] && s[119:104] == f[119:104], "header and CRC not scrambled");
      insync = dec.decode(s, 1'b0);
      if (insync) begin
        n_sync++;
        check(dec.payload[95:0] == f[103:8], "descrambled payload");
      end
    end
    check(n_sync > 50, "descrambler in sync");
    finish_tb();
  end
  initial begin #100000; failures++; $display("watchdog expired"); finish_tb(); end
endmodule
