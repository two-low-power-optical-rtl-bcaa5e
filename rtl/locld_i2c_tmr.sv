// locld_i2c_tmr: triplicated I2C slave of the LOCld-130 laser driver.
//
// Three i2c_slave_core copies run from the same (gated) clock and bus pins;
// their outputs, SDA pull-down and registers included, are combined by
// 2-of-3 majority, so one upset copy changes nothing seen outside. The
// paper states that the I2C core is protected by TMR; voting the outputs
// only (the copies do not correct each other) is this design's choice.
//
// Register map (this design's): reg0 channel-0 modulation DAC code, reg1
// channel-0 bias DAC code, reg2/reg3 the same for channel 1, 6 bits each
// (bits 7:6 are ignored). The paper gives a 6-bit modulation DAC over
// 2..10 mA and power-up currents of 8 mA modulation and 3 mA bias, so that
// the VCSEL lights before anything is configured; the code-to-current
// scales are assumed: modulation 2 mA + code x 8/63 mA (8 mA -> 47), bias
// code x 0.2 mA (3 mA -> 15).
`timescale 1ps / 1ps
module locld_i2c_tmr #(
  parameter int unsigned ADDR_PINS    = 3,
  parameter logic [6:0]  ADDR_BASE    = 7'h60,
  parameter logic [5:0]  MOD_DEFAULT  = 6'd47,
  parameter logic [5:0]  BIAS_DEFAULT = 6'd15
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 scl,
  input  logic                 sda_in,
  output logic                 sda_oe,
  input  logic [ADDR_PINS-1:0] addr_pins,
  input  logic                 ext_start,
  output logic                 start_ack,
  output logic                 busy,
  output logic [5:0]           mod_code  [2],
  output logic [5:0]           bias_code [2]
);

  localparam logic [31:0] DEFAULTS = {2'b00, BIAS_DEFAULT, 2'b00, MOD_DEFAULT,
                                      2'b00, BIAS_DEFAULT, 2'b00, MOD_DEFAULT};

  logic [31:0] regs [3];
  logic        oe [3], sa [3], bz [3], ws [3];
  logic [31:0] rv;

  for (genvar k = 0; k < 3; k++) begin : g_core
    i2c_slave_core #(
      .NREGS(4), .ADDR_PINS(ADDR_PINS), .ADDR_BASE(ADDR_BASE), .DEFAULTS(DEFAULTS)
    ) u_core (
      .clk, .rst, .scl, .sda_in, .sda_oe(oe[k]), .addr_pins, .ext_start,
      .start_ack(sa[k]), .busy(bz[k]), .regs(regs[k]), .wr_strobe(ws[k])
    );
  end

  assign rv        = (regs[0] & regs[1]) | (regs[0] & regs[2]) | (regs[1] & regs[2]);
  assign sda_oe    = (oe[0] & oe[1]) | (oe[0] & oe[2]) | (oe[1] & oe[2]);
  assign start_ack = (sa[0] & sa[1]) | (sa[0] & sa[2]) | (sa[1] & sa[2]);
  assign busy      = (bz[0] & bz[1]) | (bz[0] & bz[2]) | (bz[1] & bz[2]);

  // bits 7:6 of each register and the write strobes are not used
  logic unused_ok;
  assign unused_ok = ^{rv[31:30], rv[23:22], rv[15:14], rv[7:6], ws[0], ws[1], ws[2]};

  assign mod_code[0]  = rv[5:0];
  assign bias_code[0] = rv[13:8];
  assign mod_code[1]  = rv[21:16];
  assign bias_code[1] = rv[29:24];

endmodule
