// tb_loc_tx_system: end-to-end test of the transmitter pair at full size.
//
// The top module is used with its default parameters: a LOCx2-130 with
// both encoder channels and a LOCld-130 VCSEL driver on one shared I2C bus
// (400 kHz here, slow enough for the driver's 20 MHz ring-oscillator clock).
// Clocks are generated as the PLL would give them: a 208 ps bit clock,
// word clock at 1/30, reference clock at 1/120, so a frame lasts 24.96 ns.
// The test counts each mechanism separately:
//   * I2C: both chips acknowledge their own address, registers read back,
//     a wrong address is not acknowledged, LOCld comes up with its default
//     drive codes and its I2C oscillator stops when the bus is idle;
//   * data path: channel 0 takes 12-bit ADC frames (data mode, CRC),
//     channel 1 14-bit frames in calibration mode; every received frame must
//     match the sent samples, the CRC must hold, the header must be 1010;
//   * BCID: resets once per 3564 reference clocks; the BCID field must
//     restart at 0 after each reset and then follow the PRBS sequence;
//   * latency: constant per channel and below 75 ns;
//   * FIFO: underflow at start-up, no overflow while running;
//   * mode switch: channel 0 moved to calibration mode with 16-bit ADC
//     frames; frames must match again after resynchronisation;
//   * TMR: no disagreement between the three copies in a fault-free run.
`timescale 1ps / 1ps
module tb_loc_tx_system;
  import locx2_pkg::*;
  localparam int unsigned I2C_HALF_PS = 1_250_000;
  localparam int unsigned BIT_HALF = 104;
  `include "tb_check.svh"

  logic rst, clk_ref, bcid_rst, clk_word, clk_bit;
  logic [1:0] adc_sck, adc_fck, ser_out, frame_sof, fifo_overflow, fifo_underflow, bcid_zero, seu_seen;
  logic [NCH-1:0] adc_data [2];
  logic scl, sda_m, sda_oe, ld_i2c_clk_running;
  wire  sda_bus = sda_m & !sda_oe;
  logic [7:0] pll_cfg, drv_cfg [2];
  logic [5:0] vcsel_mod_code [2], vcsel_bias_code [2];
  word_t enc_word [2];
  `include "i2c_master.svh"

  loc_tx_system dut (
    .rst, .clk_ref, .bcid_rst, .clk_word, .clk_bit, .adc_sck, .adc_fck, .adc_data,
    .scl, .sda_in(sda_bus), .sda_oe, .x2_addr_pins(3'd2), .ld_addr_pins(3'd5),
    .ser_out, .pll_cfg, .drv_cfg, .vcsel_mod_code, .vcsel_bias_code, .ld_i2c_clk_running,
    .frame_sof, .enc_word, .fifo_overflow, .fifo_underflow, .bcid_zero, .seu_seen
  );

  // PLL model: word and reference clocks derived from the bit clock
  initial clk_bit = 1'b0;
  always #(BIT_HALF) clk_bit = ~clk_bit;
  int bc = 0;
  always @(negedge clk_bit) begin
    bc = (bc + 1) % 120;
    clk_word = (bc % 30) < 15;
    clk_ref  = bc < 60;
  end

  // BCID reset: one reference cycle every 3564
  int unsigned refcnt = 0;
  bit bcid_on = 0;
  logic [1:0] bcid_note;
  always @(posedge clk_ref) begin
    refcnt = (refcnt + 1) % BCID_PERIOD;
    bcid_rst <= bcid_on && refcnt == 5;
    bcid_note <= {2{bcid_on && refcnt == 5}};
  end

  // ADC models and receivers
  logic start;
  int unsigned bpf [2], sbits [2], afr [2];
  logic [1:0] cal, resync;
  for (genvar c = 0; c < 2; c++) begin : g_ch
    adc_emu #(.FRAME_PS(24960), .OFFSET_PS(3000 + 5000 * c)) u_adc (
      .start, .bits_per_frame(bpf[c]), .sample_bits(sbits[c]),
      .sck(adc_sck[c]), .fck(adc_fck[c]), .data(adc_data[c]), .frame_no(afr[c])
    );
    locic_serial_rx u_rx (
      .clk_bit, .ser(ser_out[c]), .cal(cal[c]), .fck(adc_fck[c]), .adc_frame(afr[c]),
      .bcid_expect(bcid_note[c]), .resync(resync[c])
    );
  end

  int n_unf = 0, n_ovf = 0;
  always @(posedge clk_word) begin
    if (!rst) begin
      if (fifo_underflow != 0) n_unf++;
      if (fifo_overflow != 0) n_ovf++;
    end
  end

  task automatic report(input int c, input int min_frames);
    int nm, nb, ncrc, nhdr, nbcid, nbb, nlat;
    longint lmin, lmax;
    if (c == 0) begin
      nm = g_ch[0].u_rx.n_match; nb = g_ch[0].u_rx.n_bad; ncrc = g_ch[0].u_rx.n_crc_bad;
      nhdr = g_ch[0].u_rx.n_hdr_bad; nbcid = g_ch[0].u_rx.n_bcid; nbb = g_ch[0].u_rx.n_bcid_bad;
      nlat = g_ch[0].u_rx.n_lat_bad; lmin = g_ch[0].u_rx.lat_min; lmax = g_ch[0].u_rx.lat_max;
    end else begin
      nm = g_ch[1].u_rx.n_match; nb = g_ch[1].u_rx.n_bad; ncrc = g_ch[1].u_rx.n_crc_bad;
      nhdr = g_ch[1].u_rx.n_hdr_bad; nbcid = g_ch[1].u_rx.n_bcid; nbb = g_ch[1].u_rx.n_bcid_bad;
      nlat = g_ch[1].u_rx.n_lat_bad; lmin = g_ch[1].u_rx.lat_min; lmax = g_ch[1].u_rx.lat_max;
    end
    $display("channel %0d: frames matched %0d, bad %0d, CRC errors %0d, BCID resets %0d, latency %0d..%0d ps",
             c, nm, nb, ncrc, nbcid, lmin, lmax);
    check(nm >= min_frames, "frames matched");
    check(nb == 0, "no unmatched frame");
    check(ncrc == 0, "CRC");
    check(nhdr == 0, "header 1010");
    check(nbcid >= 1, "BCID reset seen");
    check(nbb == 0, "BCID field");
    check(nlat == 0, "constant latency");
    check(lmax <= 75000 && lmin > 0, "latency within 75 ns");
  endtask

  int osc_edges = 0;
  always @(posedge ld_i2c_clk_running or negedge ld_i2c_clk_running) osc_edges++;

  initial begin
    logic [7:0] d [];
    logic [7:0] r [];
    bit ok;
    rst = 1'b0; scl = 1'b1; sda_m = 1'b1; start = 1'b0;
    bpf[0] = 12; sbits[0] = 12; bpf[1] = 14; sbits[1] = 14;
    cal = 2'b10; resync = '0;
    #1000 rst = 1'b1; #100_000 rst = 1'b0;
    #1_000_000;
    check(vcsel_mod_code[0] == 6'd47 && vcsel_bias_code[0] == 6'd15 &&
          vcsel_mod_code[1] == 6'd47 && vcsel_bias_code[1] == 6'd15, "LOCld default 8 mA / 3 mA");
    check(!ld_i2c_clk_running, "LOCld oscillator idle after power-up");
    // LOCx2 configuration: channel 1 in calibration mode, PLL and driver settings
    d = new[4]; d[0] = 8'h02; d[1] = 8'h5A; d[2] = 8'h11; d[3] = 8'h22;
    i2c_write(7'h52, 8'd0, d, ok);
    check(ok, "LOCx2 write acknowledged");
    i2c_read(7'h52, 8'd0, 4, r, ok);
    check(ok && r[0] == 8'h02 && r[1] == 8'h5A && r[2] == 8'h11 && r[3] == 8'h22, "LOCx2 read-back");
    check(pll_cfg == 8'h5A && drv_cfg[0] == 8'h11 && drv_cfg[1] == 8'h22, "LOCx2 analog settings out");
    // LOCld configuration
    d = new[4]; d[0] = 8'd40; d[1] = 8'd20; d[2] = 8'd30; d[3] = 8'd10;
    i2c_write(7'h65, 8'd0, d, ok);
    check(ok, "LOCld write acknowledged");
    check(vcsel_mod_code[0] == 6'd40 && vcsel_bias_code[0] == 6'd20 &&
          vcsel_mod_code[1] == 6'd30 && vcsel_bias_code[1] == 6'd10, "LOCld drive codes");
    i2c_read(7'h65, 8'd0, 4, r, ok);
    check(ok && r[0] == 8'd40 && r[3] == 8'd10, "LOCld read-back");
    #10_000_000;
    begin
      int e0;
      e0 = osc_edges;
      #5_000_000;
      check(osc_edges == e0 && !ld_i2c_clk_running, "LOCld oscillator stopped when idle");
    end
    d = new[1]; d[0] = 8'hFF;
    i2c_write(7'h54, 8'd3, d, ok);
    check(!ok && drv_cfg[1] == 8'h22 && vcsel_bias_code[1] == 6'd10, "wrong address ignored by both chips");

    start = 1'b1; bcid_on = 1;
    resync = 2'b11; #1000 resync = 2'b00;
    g_ch[0].u_rx.n_bad = 0; g_ch[1].u_rx.n_bad = 0;
    #(64'd150_000_000);     // 150 us: about 6000 frames, two BCID resets
    report(0, 5500);
    report(1, 5500);
    check(n_unf > 0, "start-up underflow seen");
    check(n_ovf == 0, "no overflow");
    check(seu_seen == 2'b00, "no TMR disagreement");
    // channel 0 to calibration mode, 16-bit ADC frames
    d = new[1]; d[0] = 8'h03;
    i2c_write(7'h52, 8'd0, d, ok);
    check(ok, "mode switch written");
    bpf[0] = 16; sbits[0] = 14; cal[0] = 1'b1; resync[0] = 1'b1;
    #1000 resync[0] = 1'b0;
    #(64'd2_000_000);
    g_ch[0].u_rx.n_match = 0; g_ch[0].u_rx.n_bad = 0; g_ch[0].u_rx.n_crc_bad = 0;
    #(64'd20_000_000);
    check(g_ch[0].u_rx.n_match > 700, "channel 0 frames after mode switch");
    check(g_ch[0].u_rx.n_bad == 0, "no frame lost after resynchronisation");
    check(g_ch[1].u_rx.n_bad == 0 && g_ch[1].u_rx.n_crc_bad == 0, "channel 1 undisturbed by the switch");
    $display("after switch: channel 0 calibration frames %0d", g_ch[0].u_rx.n_cal);
    finish_tb();
  end

  initial begin #(64'd2_000_000_000); failures++; $display("watchdog expired"); finish_tb(); end
endmodule
