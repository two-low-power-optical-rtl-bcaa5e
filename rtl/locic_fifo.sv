// locic_fifo: payload FIFO between the ADC data clock and the 160 MHz
// encoder clock of one LOCic-130 encoder.
//
// The write side stores one 8-bit ADC word (one bit of 8 channels) per data
// clock. The read side works in frames of four 160 MHz cycles (phase 0..3):
// at phase 0 it starts a frame if at least START_WORDS words of the next ADC
// sample frame are stored, otherwise it sends an all-zero payload and pulses
// underflow. Reading then overlaps writing: the ADC words keep arriving at
// 3 to 4 per read cycle while the frame is read out 30 bits per cycle. The
// synchronized write pointer is at least one read clock (3 words) old, so
// START_WORDS = 4 keeps the read behind the write in every phase for 12
// words at 480 MHz, 14 at 560 MHz and 16 at 640 MHz. If a phase 0 just
// misses the threshold the frame is read one frame later; DEPTH = 64 holds
// that case (a frame being read, the next one and part of a third). This
// overlap is what keeps the latency near one frame; a frame of 12 or 14
// words is read (data or calibration mode). Each read cycle delivers a 30-bit slice with
// the payload bits already at their positions in the 120-bit frame word
// (bits 8..29 at phase 0, bits 0..13 or 0..29 at phase 3); other bits are 0.
// The words of a frame are released at the end of phase 3.
//
// Each stored word carries a start-of-frame flag from the ADC interface. A
// frame is only started on a flagged word; if the word at the read pointer
// is not flagged (after a mode change or a lost frame clock), the reader
// jumps to the next flagged word that is stored (or drops all it has),
// sending idle frames meanwhile, so the framing recovers by itself. Likewise, if at
// phase 0 a whole frame plus START_WORDS of the next are already stored,
// the reader has fallen a frame behind (after start-up or a mode change):
// the old frame is dropped the same way, so the latency always settles at
// its minimum for the given clock phases and does not depend on history.
//
// Pointers cross clock domains in Gray code through two flip-flops. The two
// clocks are frequency locked (the paper calls the FIFO synchronous) but
// their phase is not known, hence the synchronizers. Depth, read policy and
// flags are this design's choice; the paper only says the FIFO absorbs the
// different ADC data rates.
//
// Timing: rd_data/rd_valid/rd_phase/rd_cal are registered, one read clock
// after the phase they belong to was on `phase`.
`timescale 1ps / 1ps
module locic_fifo
  import locx2_pkg::*;
#(
  parameter int unsigned DEPTH = 64,     // 8-bit words, power of two
  parameter int unsigned W     = NCH,
  parameter int unsigned START_WORDS = 4
) (
  input  logic           rst,            // asynchronous, active high
  // write side (ADC data clock)
  input  logic           wclk,
  input  logic           wr_en,
  input  logic [W-1:0]   wr_data,
  input  logic           wr_sof,         // first word of an ADC frame
  output logic           overflow,       // pulse: word dropped, FIFO full
  // read side (160 MHz)
  input  logic           rclk,
  input  phase_t         phase,
  input  logic           cal_mode,
  output word_t          rd_data,
  output logic           rd_valid,
  output phase_t         rd_phase,
  output logic           rd_cal,
  output logic           underflow       // pulse: frame without data
);

  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned BW = $clog2(DEPTH * W);

  logic [W-1:0] mem [DEPTH];
  logic         sof [DEPTH];

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction
  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    for (int i = AW; i >= 0; i--) b[i] = (i == AW) ? g[i] : (b[i+1] ^ g[i]);
    return b;
  endfunction

  // ---------------- write side ----------------
  logic [AW:0] wptr, wgray, rgray_w1, rgray_w2, rptr_w;
  logic [AW:0] rptr, rgray, wgray_r1, wgray_r2, wptr_r, avail;
  logic        full;

  assign rptr_w = gray2bin(rgray_w2);
  assign full   = (wptr - rptr_w) == (AW+1)'(DEPTH);

  always_ff @(posedge wclk or posedge rst) begin
    if (rst) begin
      wptr     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
      overflow <= 1'b0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      overflow <= wr_en && full;
      if (wr_en && !full) begin
        wptr  <= wptr + 1'b1;
        wgray <= bin2gray(wptr + 1'b1);
      end
    end
  end

  always_ff @(posedge wclk) begin
    if (wr_en && !full) begin
      mem[wptr[AW-1:0]] <= wr_data;
      sof[wptr[AW-1:0]] <= wr_sof;
    end
  end

  // ---------------- read side ----------------
  logic        active, cal_f;
  logic        start_ok, skip, lag;
  logic [AW:0] jump;
  logic [AW:0] nwords;
  logic        cal_now, act_now;
  word_t       slice;

  assign wptr_r   = gray2bin(wgray_r2);
  assign avail    = wptr_r - rptr;
  assign nwords   = cal_now ? (AW+1)'(WORDS_CAL) : (AW+1)'(WORDS_DATA);
  assign cal_now  = (phase == 2'd0) ? cal_mode : cal_f;
  assign lag      = (avail >= nwords + (AW+1)'(START_WORDS));
  assign start_ok = (avail >= (AW+1)'(START_WORDS)) && sof[rptr[AW-1:0]] && !lag;
  assign skip     = !act_now && (avail != '0) &&
                    (!sof[rptr[AW-1:0]] || (phase == 2'd0 && lag));
  assign act_now  = (phase == 2'd0) ? start_ok : active;

  // Distance from the read pointer to the next stored start-of-frame word.
  always_comb begin
    jump = avail;
    for (int i = int'(DEPTH) - 1; i >= 1; i--)
      if ((AW+1)'(i) < avail && sof[AW'(int'(rptr[AW-1:0]) + i)]) jump = (AW+1)'(i);
  end

  // Payload slice for the current phase, taken from the frame starting at rptr.
  always_comb begin
    int          j;
    int unsigned plen;
    logic [BW-1:0] idx;
    plen  = cal_now ? PAYLOAD_CAL : PAYLOAD_DATA;
    slice = '0;
    for (int i = 0; i < int'(WORD_BITS); i++) begin
      j   = int'(phase) * int'(WORD_BITS) + i - int'(HDR_BITS);
      idx = BW'(int'(rptr[AW-1:0]) * int'(W) + j);
      if (act_now && j >= 0 && j < int'(plen))
        slice[i] = mem[AW'(idx / BW'(W))][$clog2(W)'(idx % BW'(W))];
    end
  end

  always_ff @(posedge rclk or posedge rst) begin
    if (rst) begin
      rptr      <= '0;
      rgray     <= '0;
      wgray_r1  <= '0;
      wgray_r2  <= '0;
      active    <= 1'b0;
      cal_f     <= 1'b0;
      rd_data   <= '0;
      rd_valid  <= 1'b0;
      rd_phase  <= '0;
      rd_cal    <= 1'b0;
      underflow <= 1'b0;
    end else begin
      wgray_r1  <= wgray;
      wgray_r2  <= wgray_r1;
      underflow <= 1'b0;
      if (phase == 2'd0) begin
        active    <= start_ok;
        cal_f     <= cal_mode;
        underflow <= !start_ok;  // also while resynchronizing
      end
      if (phase == 2'd3 && active) begin
        rptr  <= rptr + nwords;
        rgray <= bin2gray(rptr + nwords);
      end else if (skip) begin
        rptr  <= rptr + jump;
        rgray <= bin2gray(rptr + jump);
      end
      rd_data  <= slice;
      rd_valid <= act_now;
      rd_phase <= phase;
      rd_cal   <= cal_now;
    end
  end

endmodule
