// loc_tx_system: front-end optical transmitter made of the two chips.
//
// A LOCx2-130 serializer chip encodes the ADC data of two channels into
// LOCic-130 frames and sends them out as two 4.8 Gb/s serial streams; a
// LOCld-130 chip drives the two VCSELs of the optical module. Both chips
// hang on one I2C bus from the control link, with different addresses
// (0x50 + pins and 0x60 + pins). The serial streams, which in hardware
// pass through the LOCx2-130 line drivers and the LOCld-130 analog
// amplifiers to the lasers, leave this module as ports, as do the LOCld-130
// current settings and the LOCx2-130 analog settings; the PLL clocks come
// in as ports. Pairing the two chips in one module follows the generic
// transmitter of the paper (encoder, serializer, laser driver); the bus
// sharing and addresses are this design's.
`timescale 1ps / 1ps
module loc_tx_system
  import locx2_pkg::*;
(
  input  logic           rst,
  input  logic           clk_ref,
  input  logic           bcid_rst,
  input  logic           clk_word,
  input  logic           clk_bit,
  input  logic [1:0]     adc_sck,
  input  logic [1:0]     adc_fck,
  input  logic [NCH-1:0] adc_data [2],
  input  logic           scl,
  input  logic           sda_in,     // SDA as seen on the bus
  output logic           sda_oe,     // either chip pulls SDA low
  input  logic [2:0]     x2_addr_pins,
  input  logic [2:0]     ld_addr_pins,
  output logic [1:0]     ser_out,
  output logic [7:0]     pll_cfg,
  output logic [7:0]     drv_cfg [2],
  output logic [5:0]     vcsel_mod_code  [2],
  output logic [5:0]     vcsel_bias_code [2],
  output logic           ld_i2c_clk_running,
  output logic [1:0]     frame_sof,
  output word_t          enc_word [2],
  output logic [1:0]     fifo_overflow,
  output logic [1:0]     fifo_underflow,
  output logic [1:0]     bcid_zero,
  output logic [1:0]     seu_seen
);

  logic x2_sda_oe, ld_sda_oe;

  locx2_130 u_locx2 (
    .rst, .clk_ref, .bcid_rst, .clk_word, .clk_bit,
    .adc_sck, .adc_fck, .adc_data,
    .scl, .sda_in, .sda_oe(x2_sda_oe), .addr_pins(x2_addr_pins),
    .ser_out, .pll_cfg, .drv_cfg,
    .frame_sof, .enc_word, .fifo_overflow, .fifo_underflow, .bcid_zero, .seu_seen
  );

  locld_130 u_locld (
    .por(rst), .scl, .sda_in, .sda_oe(ld_sda_oe), .addr_pins(ld_addr_pins),
    .mod_code(vcsel_mod_code), .bias_code(vcsel_bias_code),
    .i2c_clk_running(ld_i2c_clk_running)
  );

  assign sda_oe = x2_sda_oe | ld_sda_oe;

endmodule
