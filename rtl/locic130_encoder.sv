// locic130_encoder: one LOCic-130 encoder channel (ADC data in, 30-bit
// serializer words out at 160 MHz).
//
// Structure (as in the paper): ADC interface -> FIFO -> core encoder (CRC
// generator, scrambler, frame header generator, frame builder) -> majority
// voter. Every block is instantiated three times (triple modular
// redundancy); the scrambler, which has feedback and no reset, is
// triplicated internally with voters in front of its flip-flops; a final
// voter with output register combines the three frame builders. The
// 160 MHz frame phase counter (which of the four words of a 25 ns frame is
// being built) also has feedback, so its three copies load a voted next
// value too.
//
// Latency from the FIFO read to dout: FIFO output register, frame builder
// register, voter register = 3 cycles of 160 MHz. dout_sof marks the first
// word (header) of each frame. A frame leaves every 4 cycles: 120 bits per
// 25 ns = 4.8 Gb/s.
`timescale 1ps / 1ps
module locic130_encoder
  import locx2_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 64
) (
  input  logic           rst,
  // ADC side
  input  logic           sck,
  input  logic           fck,
  input  logic [NCH-1:0] din,
  // 160 MHz side
  input  logic           clk,
  input  logic           bcid_rst,   // synchronous to clk, one LHC cycle long
  input  logic           cal_mode,   // 1: 112-bit payload, no CRC
  output word_t          dout,
  output logic           dout_sof,
  output logic           overflow,   // FIFO copy 0 status, for monitoring
  output logic           underflow,
  output logic           bcid_zero,
  output logic           seu_seen    // the three copies disagreed
);

  // ---------------- frame phase, triplicated with voted feedback -------
  phase_t ph [3];
  phase_t ph_vote;
  assign ph_vote = phase_t'(maj3(64'(ph[0]), 64'(ph[1]), 64'(ph[2])));
  always_ff @(posedge clk or posedge rst) begin
    if (rst) for (int k = 0; k < 3; k++) ph[k] <= '0;
    else     for (int k = 0; k < 3; k++) ph[k] <= ph_vote + 2'd1;
  end

  // ---------------- three copies of the datapath -------------------------
  logic          wr_en   [3];
  logic [NCH-1:0] wr_data [3];
  logic          ovf     [3];
  logic          unf     [3];
  word_t         pl      [3];
  logic          pl_v    [3];
  phase_t        pl_ph   [3];
  logic          pl_cal  [3];
  word_t         scr     [3];
  logic [15:0]   crc     [3];
  logic [7:0]    hdr     [3];
  logic          bz      [3];
  word_t         fb      [3];
  phase_t        fb_ph   [3];

  for (genvar k = 0; k < 3; k++) begin : g_copy
    logic fs;
    locic_adc_if u_adc (
      .sck, .rst, .fck, .din, .cal_mode,
      .wr_en(wr_en[k]), .wr_data(wr_data[k]), .frame_start(fs)
    );
    locic_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
      .rst,
      .wclk(sck), .wr_en(wr_en[k]), .wr_data(wr_data[k]), .wr_sof(fs), .overflow(ovf[k]),
      .rclk(clk), .phase(ph[k]), .cal_mode,
      .rd_data(pl[k]), .rd_valid(pl_v[k]), .rd_phase(pl_ph[k]), .rd_cal(pl_cal[k]),
      .underflow(unf[k])
    );
    locic_crc16 u_crc (
      .clk, .rst, .phase(pl_ph[k]), .cal(pl_cal[k]), .din(pl[k]), .crc(crc[k])
    );
    locic_frame_header u_hdr (
      .clk, .rst, .phase(pl_ph[k]), .bcid_rst, .hdr(hdr[k]), .bcid_zero(bz[k])
    );
    locic_frame_builder u_fb (
      .clk, .rst, .phase(pl_ph[k]), .cal(pl_cal[k]), .hdr(hdr[k]), .scr(scr[k]),
      .crc(crc[k]), .dout(fb[k]), .dout_phase(fb_ph[k])
    );
  end

  locic_scrambler_tmr u_scr (
    .clk, .phase(pl_ph), .cal(pl_cal), .din(pl), .dout(scr)
  );

  // ---------------- final majority voter and register -------------------
  logic [30:0] vq, vy_unused;
  logic        mism;
  tmr_voter #(.W(31)) u_vote (
    .clk, .rst,
    .a({fb_ph[0] == 2'd0, fb[0]}),
    .b({fb_ph[1] == 2'd0, fb[1]}),
    .c({fb_ph[2] == 2'd0, fb[2]}),
    .y(vy_unused), .q(vq), .mismatch(mism)
  );
  assign dout     = vq[WORD_BITS-1:0];
  assign dout_sof = vq[30];
  assign seu_seen = mism;

  assign overflow  = ovf[0];
  assign underflow = unf[0];
  assign bcid_zero = bz[0];

  // pl_v is kept for debug visibility of copy 0 only
  logic unused_ok;
  assign unused_ok = pl_v[0] ^ pl_v[1] ^ pl_v[2];

endmodule
