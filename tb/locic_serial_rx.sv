// locic_serial_rx: testbench receiver for one 4.8 Gb/s LOCic-130 stream.
//
// Samples `ser` on the bit clock, finds the frame boundary as the position
// where four successive 120-bit frames start with 1010, then cuts frames,
// descrambles them with the reference decoder, checks the CRC (data mode),
// matches the payload against the ADC model's samples (frames must follow
// each other), follows the BCID field from each announced BCID reset, and
// measures the latency from an ADC frame-clock edge to the first bit of the
// frame that carries that ADC frame.
`timescale 1ps / 1ps
module locic_serial_rx (
  input  logic        clk_bit,
  input  logic        ser,
  input  logic        cal,
  input  logic        fck,          // frame clock of the ADC model
  input  int unsigned adc_frame,    // frame the ADC model is sending
  input  logic        bcid_expect,  // pulse: a BCID reset was sent
  input  logic        resync        // pulse: forget the frame history (mode change)
);
  import locic_ref_pkg::*;

  int n_frames = 0, n_match = 0, n_bad = 0, n_crc_bad = 0, n_hdr_bad = 0;
  int n_bcid = 0, n_bcid_bad = 0, n_lat_bad = 0, n_data = 0, n_cal = 0;
  longint lat0 = -1, lat_min = -1, lat_max = -1;

  logic [479:0] h;          // h[0] = newest bit
  int           pos = -1;   // bits since last frame end (when locked)
  bit           locked = 0;
  locic_decoder dec = new();
  int           last_n = -1, f_since = -1, bcid_wait = -1, skip = 0;
  longint       fck_t [$];
  longint       bit_t [120];
  logic [23:0]  hh;

  always @(posedge fck) fck_t.push_back($time);
  always @(posedge bcid_expect) bcid_wait = 0;
  always @(posedge resync) begin last_n = -1; skip = 3; lat0 = -1; end

  function automatic bit hdr_at(input int end_pos);
    // frame ending at h[end_pos]: its bit 0 is h[end_pos + 119]
    return h[end_pos + 119] == 1'b1 && h[end_pos + 118] == 1'b0 &&
           h[end_pos + 117] == 1'b1 && h[end_pos + 116] == 1'b0;
  endfunction

  always @(posedge clk_bit) begin
    h = {h[478:0], ser};
    for (int i = 119; i > 0; i--) bit_t[i] = bit_t[i-1];
    bit_t[0] = $time;
    if (!locked) begin
      if (hdr_at(0) && hdr_at(120) && hdr_at(240) && hdr_at(360)) begin
        locked = 1; pos = 0;
      end
    end else begin
      pos++;
      if (pos == 120) begin
        pos = 0;
        frame();
      end
    end
  end

  task automatic frame();
    logic [119:0] f;
    bit insync, found;
    int n;
    for (int i = 0; i < 120; i++) f[i] = h[119 - i];
    n_frames++;
    insync = dec.decode(f, cal);
    if (f[3:0] != 4'b0101) n_hdr_bad++;
    hh = {hh[15:0], f[7:0]};
    if (f_since >= 0) f_since++;
    // a BCID reset is recognised from three headers in a row (BCID 0, 1, 2)
    if (bcid_wait >= 0 && hh == {ref_header(0), ref_header(1), ref_header(2)}) begin
      f_since = 2; bcid_wait = -1; n_bcid++;
    end else if (f_since >= 0 && bcid_wait < 0) begin
      if (f[7:0] != ref_header(f_since)) n_bcid_bad++;
    end
    if (bcid_wait >= 0 && ++bcid_wait > 6) begin n_bcid_bad++; bcid_wait = -1; end
    if (skip > 0) begin skip--; return; end
    if (!insync || dec.payload == '0) return;
    found = 0;
    for (n = (last_n >= 0 ? last_n + 1 : 0); n <= int'(adc_frame); n++)
      if (ref_payload(n, cal) == dec.payload) begin found = 1; break; end
    if (!found || (last_n >= 0 && n != last_n + 1)) begin
      n_bad++;
      if (n_bad <= 3) $display("%m: unmatched frame at %0t (last %0d, found %0d)", $time, last_n, found);
      return;
    end
    last_n = n;
    n_match++;
    if (cal) n_cal++; else n_data++;
    if (!dec.crc_ok()) n_crc_bad++;
    if (n < fck_t.size()) begin
      longint lat;
      lat = bit_t[119] - fck_t[n];
      if (lat_min < 0 || lat < lat_min) lat_min = lat;
      if (lat > lat_max) lat_max = lat;
      if (lat0 < 0) lat0 = lat;
      else if (lat != lat0) n_lat_bad++;
    end
  endtask
endmodule
