// locx2_130: the LOCx2-130 two-channel serializer chip (digital part).
//
// Each channel takes the serial outputs of its ADCs (8 data lines with a
// data clock and a 40 MHz frame clock), builds LOCic-130 frames of 120 bits
// per LHC bunch crossing (locic130_encoder) and serializes them at
// 4.8 Gb/s (tds_serializer). An I2C slave, clocked here by the 40 MHz
// reference clock, holds the configuration. The shared PLL and the two
// output line drivers are analog: the PLL's 160 MHz word clock and 4.8 GHz
// bit clock come in as ports (clk_word, clk_bit, both locked to clk_ref),
// and the driver and PLL settings leave as ports. The BCID reset arrives
// with the 40 MHz reference clock and is brought into the 160 MHz domain by
// two flip-flops.
//
// Register map (this design's; the paper gives none), I2C address
// 7'b1010xxx with xxx from the address pins:
//   reg0 bit0/bit1  calibration mode of channel 0/1 (112-bit payload, no CRC)
//   reg1            PLL setting (to the analog PLL)
//   reg2, reg3      line driver setting of channel 0, 1
// The paper's Fig. 7 shows two ADCs with their own SCK/FCK per channel; here
// both ADCs of a channel are assumed to share one SCK/FCK pair, so each
// channel has one data clock and one frame clock input.
`timescale 1ps / 1ps
module locx2_130
  import locx2_pkg::*;
#(
  parameter int unsigned ADDR_PINS  = 3,
  parameter logic [6:0]  ADDR_BASE  = 7'h50,
  parameter int unsigned FIFO_DEPTH = 64
) (
  input  logic                 rst,         // chip reset, active high
  input  logic                 clk_ref,     // 40 MHz LHC reference clock
  input  logic                 bcid_rst,    // BCID reset, clk_ref domain
  input  logic                 clk_word,    // 160 MHz from the PLL
  input  logic                 clk_bit,     // 4.8 GHz from the PLL
  // ADC inputs, per channel
  input  logic [1:0]           adc_sck,
  input  logic [1:0]           adc_fck,
  input  logic [NCH-1:0]       adc_data [2],
  // I2C
  input  logic                 scl,
  input  logic                 sda_in,
  output logic                 sda_oe,
  input  logic [ADDR_PINS-1:0] addr_pins,
  // serial outputs to the line drivers
  output logic [1:0]           ser_out,
  // settings of the analog blocks
  output logic [7:0]           pll_cfg,
  output logic [7:0]           drv_cfg [2],
  // monitoring
  output logic [1:0]           frame_sof,   // word clock: first word of a frame
  output word_t                enc_word [2],
  output logic [1:0]           fifo_overflow,
  output logic [1:0]           fifo_underflow,
  output logic [1:0]           bcid_zero,
  output logic [1:0]           seu_seen
);

  logic [31:0] regs;
  logic        wr_strobe_unused, busy_unused, start_ack_unused;

  i2c_slave_core #(
    .NREGS(4), .ADDR_PINS(ADDR_PINS), .ADDR_BASE(ADDR_BASE), .DEFAULTS(32'h0)
  ) u_i2c (
    .clk(clk_ref), .rst, .scl, .sda_in, .sda_oe, .addr_pins, .ext_start(1'b0),
    .start_ack(start_ack_unused), .busy(busy_unused), .regs, .wr_strobe(wr_strobe_unused)
  );

  assign pll_cfg    = regs[15:8];
  assign drv_cfg[0] = regs[23:16];
  assign drv_cfg[1] = regs[31:24];

  // BCID reset into the word-clock domain
  logic [1:0] bcid_sync;
  always_ff @(posedge clk_word or posedge rst) begin
    if (rst) bcid_sync <= '0;
    else     bcid_sync <= {bcid_sync[0], bcid_rst};
  end

  for (genvar c = 0; c < 2; c++) begin : g_ch
    logic load_unused;
    locic130_encoder #(.FIFO_DEPTH(FIFO_DEPTH)) u_enc (
      .rst, .sck(adc_sck[c]), .fck(adc_fck[c]), .din(adc_data[c]),
      .clk(clk_word), .bcid_rst(bcid_sync[1]), .cal_mode(regs[c]),
      .dout(enc_word[c]), .dout_sof(frame_sof[c]),
      .overflow(fifo_overflow[c]), .underflow(fifo_underflow[c]),
      .bcid_zero(bcid_zero[c]), .seu_seen(seu_seen[c])
    );
    tds_serializer #(.W(WORD_BITS)) u_ser (
      .clk_bit, .rst, .clk_word, .word(enc_word[c]), .ser(ser_out[c]), .load(load_unused)
    );
  end

  // unused upper bits of reg0
  logic unused_ok;
  assign unused_ok = ^regs[7:2];

endmodule
