// locld_130: digital part of the LOCld-130 two-channel VCSEL driver.
//
// The chip's data path (per channel a two-stage limiting amplifier and a
// high-current differential driver, 5.12 Gb/s) is analog and is not
// modelled here; what is logic is the configuration: a triplicated I2C
// slave clocked by a ring oscillator that runs only during bus traffic.
// The slave holds, per channel, the 6-bit modulation-current DAC code and
// the bias-current DAC code, which leave this module as ports towards the
// two drivers. After power-on reset they hold the paper's default of 8 mA
// modulation and 3 mA bias (codes 47 and 15 under the assumed scales, see
// locld_i2c_tmr). Because the clock generator is a behavioural model this
// module simulates but is not synthesizable as a whole.
`timescale 1ps / 1ps
module locld_130 #(
  parameter int unsigned ADDR_PINS = 3,
  parameter logic [6:0]  ADDR_BASE = 7'h60
) (
  input  logic                 por,        // power-on reset, active high
  input  logic                 scl,
  input  logic                 sda_in,
  output logic                 sda_oe,
  input  logic [ADDR_PINS-1:0] addr_pins,
  output logic [5:0]           mod_code  [2],
  output logic [5:0]           bias_code [2],
  output logic                 i2c_clk_running
);

  logic clk, start_req, start_ack, busy;

  locld_clkgen u_clkgen (
    .scl, .sda(sda_in), .busy, .start_ack, .start_req, .clk
  );

  locld_i2c_tmr #(.ADDR_PINS(ADDR_PINS), .ADDR_BASE(ADDR_BASE)) u_i2c (
    .clk, .rst(por), .scl, .sda_in, .sda_oe, .addr_pins,
    .ext_start(start_req), .start_ack, .busy, .mod_code, .bias_code
  );

  assign i2c_clk_running = start_req || busy;

endmodule
