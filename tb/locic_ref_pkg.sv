// locic_ref_pkg: reference model of the LOCic-130 frame for the testbenches.
//
// Written independently of the RTL: the CRC is computed as the remainder of
// a polynomial long division, the PRBS streams from their recurrences and
// the descrambler from the received bit history. ADC samples are a
// deterministic function of channel and frame number, so a testbench can
// tell which frame a decoded payload came from.
`timescale 1ps / 1ps
package locic_ref_pkg;

  // Sample of channel ch in ADC frame n, `bits` wide.
  function automatic int unsigned sample_val(input int unsigned n, input int unsigned ch,
                                             input int unsigned bits);
    int unsigned h;
    h = n * 32'd2654435761 + ch * 32'd40503 + 32'd12345;
    h = h ^ (h >> 13);
    h = h * 32'd1103515245;
    h = h ^ (h >> 16);
    return h & ((32'd1 << bits) - 1);
  endfunction

  // CRC-16 (x^16+x^14+x^12+x^11+x^9+x^8+x^7+x^4+x+1) of n message bits
  // m[0] first: remainder of M(x) * x^16 divided by G(x).
  function automatic logic [15:0] ref_crc(input logic [111:0] m, input int n);
    logic [16:0] g;
    logic        r [];
    logic [15:0] c;
    g = 17'b1_0101_1011_1001_0011;
    r = new[n + 16];
    for (int i = 0; i < n; i++) r[i] = m[i];
    for (int i = n; i < n + 16; i++) r[i] = 1'b0;
    for (int i = 0; i < n; i++)
      if (r[i]) for (int k = 0; k <= 16; k++) r[i+k] = r[i+k] ^ g[16-k];
    for (int k = 0; k < 16; k++) c[15-k] = r[n+k];
    return c;
  endfunction

  // PRBS output streams from the seed (all ones).
  function automatic logic prbs5_bit(input int unsigned i);
    logic o [31];
    for (int k = 0; k < 5; k++) o[k] = 1'b1;
    for (int k = 5; k < 31; k++) o[k] = o[k-5] ^ o[k-3];
    return o[i % 31];
  endfunction
  function automatic logic prbs7_bit(input int unsigned i);
    logic o [127];
    for (int k = 0; k < 7; k++) o[k] = 1'b1;
    for (int k = 7; k < 127; k++) o[k] = o[k-7] ^ o[k-6];
    return o[i % 127];
  endfunction

  // Expected header of the frame sent f frames after a BCID reset.
  function automatic logic [7:0] ref_header(input int unsigned f);
    logic [7:0] h;
    h[0] = 1'b1; h[1] = 1'b0; h[2] = 1'b1; h[3] = 1'b0;
    h[4] = prbs5_bit(2*f);     h[5] = prbs5_bit(2*f + 1);
    h[6] = prbs7_bit(2*f);     h[7] = prbs7_bit(2*f + 1);
    return h;
  endfunction

  // Unscrambled payload of ADC frame n: payload bit j = bit (N-1-j/8) of
  // channel j%8, N = 12 (data) or 14 (calibration).
  function automatic logic [111:0] ref_payload(input int unsigned n, input bit cal);
    logic [111:0] p;
    int unsigned nb;
    nb = cal ? 14 : 12;
    p  = '0;
    for (int j = 0; j < 8 * int'(nb); j++)
      p[j] = sample_val(n, j % 8, nb)[nb - 1 - j/8];
    return p;
  endfunction

  // Receiver side: descrambles frames and checks them.
  class locic_decoder;
    logic [57:0] h;       // h[k] = scrambled bit k+1 positions ago
    int unsigned seen;    // scrambled bits seen so far
    logic [111:0] payload;
    logic [15:0]  crc_rx;
    logic [7:0]   hdr;
    bit           cal;

    function new();
      h = '0; seen = 0;
    endfunction

    // f[i] = frame bit b_i. Returns 1 when the descrambler was in sync.
    function bit decode(input logic [119:0] f, input bit cal_i);
      int unsigned plen;
      logic s;
      bit ok;
      cal  = cal_i;
      plen = cal ? 112 : 96;
      ok   = (seen >= 58);
      hdr  = f[7:0];
      payload = '0;
      for (int j = 0; j < int'(plen); j++) begin
        s = f[8 + j];
        payload[j] = s ^ h[38] ^ h[57];
        h = {h[56:0], s};
        seen++;
      end
      for (int k = 0; k < 16; k++) crc_rx[15-k] = f[104 + k];
      return ok;
    endfunction

    function bit crc_ok();
      return cal || (ref_crc(payload, 96) == crc_rx);
    endfunction
  endclass

endpackage
