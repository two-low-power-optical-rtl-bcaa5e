// tb_locic130_encoder: end-to-end test of one LOCic-130 encoder channel.
//
// An ADC model sends 12-bit samples at 480 MHz (data mode); later the
// encoder is switched to calibration mode and the ADC model to 14-bit
// samples at 560 MHz. The 30-bit output words are collected into 120-bit
// frames and decoded by the reference receiver: header pattern, BCID
// (PRBS) fields counted from each BCID reset, descrambled payload against
// the samples sent, CRC in data mode. The latency from the frame clock edge
// of an ADC frame to the first output word of its encoded frame must be
// constant and within the 75 ns transmitter budget. Underflow at start-up,
// both modes and BCID resets must each be seen.
`timescale 1ps / 1ps
module tb_locic130_encoder;
  import locx2_pkg::*;
  import locic_ref_pkg::*;

  logic        rst, clk, bcid_rst, cal_mode, start;
  logic        sck, fck;
  logic [7:0]  din;
  int unsigned bpf, sbits, adc_frame;
  word_t       dout;
  logic        dout_sof, overflow, underflow, bcid_zero, seu_seen;

  int checks = 0, failures = 0;
  int n_underflow = 0, n_data = 0, n_cal = 0, n_bcid = 0;

  locic130_encoder dut (
    .rst, .sck, .fck, .din, .clk, .bcid_rst, .cal_mode,
    .dout, .dout_sof, .overflow, .underflow, .bcid_zero, .seu_seen
  );

  adc_emu #(.OFFSET_PS(1700)) u_adc (
    .start, .bits_per_frame(bpf), .sample_bits(sbits),
    .sck, .fck, .data(din), .frame_no(adc_frame)
  );

  initial clk = 1'b0;
  always #3125 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---- frame time stamps of the ADC side (FCK rising edges) ----
  longint fck_t [$];
  always @(posedge fck) fck_t.push_back($time);

  // ---- receiver ----
  locic_decoder dec = new();
  logic [119:0] fr;
  int   wcnt = -1;
  int   last_n = -1;
  int   skip = 0;
  int   f_since = -1;
  int   bcid_wait = -1;
  longint lat0 = -1;
  longint sof_t;

  always @(posedge clk) begin
    if (!rst) begin
      if (underflow) n_underflow++;
      if (dout_sof) begin wcnt = 0; sof_t = $time; end
      if (wcnt >= 0) begin
        fr[30*wcnt +: 30] = dout;
        wcnt++;
        if (wcnt == 4) begin
          wcnt = -1;
          frame_done();
        end
      end
    end
  end

  task automatic frame_done();
    bit insync;
    int n;
    bit found;
    insync = dec.decode(fr, cal_mode);
    check(fr[3:0] == 4'b0101, "header 1010");
    // BCID field
    if (bcid_wait >= 0 && fr[7:0] == ref_header(0)) begin
      f_since = 0; bcid_wait = -1; n_bcid++;
    end else if (f_since >= 0) begin
      f_since++;
      check(fr[7:0] == ref_header(f_since), "BCID/PRBS header");
    end
    if (bcid_wait >= 0) begin
      bcid_wait++;
      check(bcid_wait < 4, "BCID reset reached header");
    end
    if (skip > 0) begin skip--; return; end
    if (!insync || dec.payload == '0) return;
    // which ADC frame is it?
    found = 0;
    for (n = (last_n >= 0 ? last_n + 1 : 0); n <= adc_frame; n++)
      if (ref_payload(n, cal_mode) == dec.payload) begin found = 1; break; end
    if (last_n >= 0) check(found && n == last_n + 1, "payload of next ADC frame");
    else             check(found, "payload matches an ADC frame");
    if (!found) return;
    last_n = n;
    check(dec.crc_ok(), "CRC");
    if (cal_mode) n_cal++; else n_data++;
    // latency: ADC frame n started at fck_t[n]; its first output word left at sof_t
    if (n < fck_t.size()) begin
      longint lat;
      lat = sof_t - fck_t[n];
      if (lat0 < 0) begin
        lat0 = lat;
        $display("latency ADC frame edge -> first encoded word: %0d ps", lat);
        check(lat <= 75000, "latency within 75 ns");
      end else begin
        check(lat == lat0, "constant latency");
      end
    end
  endtask

  initial begin
    rst = 1'b0; bcid_rst = 1'b0; cal_mode = 1'b0; start = 1'b0;
    bpf = 12; sbits = 12;
    #100 rst = 1'b1;
    repeat (4) @(posedge clk);
    rst = 1'b0;
    repeat (20) @(posedge clk);
    start = 1'b1;
    repeat (200) @(posedge clk);
    // BCID reset: one 40 MHz cycle = 4 word clocks
    for (int r = 0; r < 2; r++) begin
      @(posedge clk); bcid_rst <= 1'b1; bcid_wait = 0;
      repeat (4) @(posedge clk); bcid_rst <= 1'b0;
      repeat (160) @(posedge clk);
    end
    // switch to calibration mode and 14-bit, 560 MHz ADC
    wait (fck == 1'b0); wait (fck == 1'b1);
    #1000 bpf = 14; sbits = 14; cal_mode = 1'b1; skip = 4; last_n = -1; lat0 = -1;
    repeat (300) @(posedge clk);
    // 16-bit frames at 640 MHz, 14-bit samples, still calibration mode
    wait (fck == 1'b0); wait (fck == 1'b1);
    #1000 bpf = 16; skip = 4; last_n = -1; lat0 = -1;
    repeat (200) @(posedge clk);
    check(n_underflow > 0, "start-up underflow seen");
    check(n_data > 20, "data-mode frames decoded");
    check(n_cal > 20, "calibration-mode frames decoded");
    check(n_bcid == 2, "both BCID resets seen");
    check(!overflow, "no overflow");
    $display("data frames %0d, calibration frames %0d, BCID resets %0d, underflows %0d",
             n_data, n_cal, n_bcid, n_underflow);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
