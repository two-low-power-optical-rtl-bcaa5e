// i2c_slave_core: I2C slave with a small configuration register file.
//
// Used in both chips to load their settings from the control link. SCL and
// SDA are sampled by the core clock through two flip-flops; START, STOP and
// the SCL edges are found from the samples, so the core clock must be at
// least about 8x the SCL rate. Protocol (this design's choice, the paper
// gives none): after START and the 7-bit device address with R/W = 0, the
// first byte is the register pointer and further bytes are written to
// consecutive registers; with R/W = 1 bytes are read from the pointer
// onwards until the master answers NACK. Every byte is acknowledged. The
// address is ADDR_BASE with its low ADDR_PINS bits replaced by the address
// pins. ext_start tells the core that a START was seen while its clock was
// stopped (see locld_clkgen); start_ack acknowledges it.
// Registers reset to DEFAULTS (register i in bits 8*i+7..8*i).
`timescale 1ps / 1ps
module i2c_slave_core #(
  parameter int unsigned       NREGS     = 4,        // power of two
  parameter int unsigned       ADDR_PINS = 3,
  parameter logic [6:0]        ADDR_BASE = 7'h50,
  parameter logic [8*NREGS-1:0] DEFAULTS = '0
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 scl,
  input  logic                 sda_in,
  output logic                 sda_oe,      // 1: pull SDA low
  input  logic [ADDR_PINS-1:0] addr_pins,
  input  logic                 ext_start,
  output logic                 start_ack,
  output logic                 busy,
  output logic [8*NREGS-1:0]   regs,
  output logic                 wr_strobe    // pulse: a register was written
);

  localparam int unsigned IW = (NREGS > 1) ? $clog2(NREGS) : 1;

  typedef enum logic [3:0] {
    S_IDLE, S_ADDR, S_ACK_ADDR, S_PTR, S_ACK_PTR, S_WR, S_ACK_WR, S_RD, S_RACK
  } state_t;

  state_t     state;
  logic [2:0] scl_s, sda_s;
  logic       scl_rise, scl_fall, start_c, stop_c;
  logic [3:0] bitcnt;
  logic [7:0] shreg, ptr, rdbyte;
  logic       nack;
  logic [6:0] my_addr;
  logic [IW-1:0] nxt_idx;

  assign nxt_idx  = ptr[IW-1:0] + 1'b1;

  assign my_addr  = {ADDR_BASE[6:ADDR_PINS], addr_pins};
  assign scl_rise = scl_s[1] && !scl_s[2];
  assign scl_fall = !scl_s[1] && scl_s[2];
  assign start_c  = scl_s[1] && scl_s[2] && !sda_s[1] && sda_s[2];
  assign stop_c   = scl_s[1] && scl_s[2] && sda_s[1] && !sda_s[2];
  assign busy     = (state != S_IDLE);
  assign rdbyte   = regs[8*ptr[IW-1:0] +: 8];

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      scl_s     <= '1;
      sda_s     <= '1;
      state     <= S_IDLE;
      bitcnt    <= '0;
      shreg     <= '0;
      ptr       <= '0;
      nack      <= 1'b0;
      sda_oe    <= 1'b0;
      start_ack <= 1'b0;
      regs      <= DEFAULTS;
      wr_strobe <= 1'b0;
    end else begin
      scl_s     <= {scl_s[1:0], scl};
      sda_s     <= {sda_s[1:0], sda_in};
      start_ack <= ext_start;
      wr_strobe <= 1'b0;
      if (start_c || (ext_start && !start_ack && state == S_IDLE)) begin
        state  <= S_ADDR;
        bitcnt <= '0;
        sda_oe <= 1'b0;
        // after a stopped clock the synchronisers hold stale levels: load
        // the START condition (SCL high, SDA low) so no false edge follows
        if (!start_c) begin
          scl_s <= '1;
          sda_s <= '0;
        end
      end else if (stop_c) begin
        state  <= S_IDLE;
        sda_oe <= 1'b0;
      end else if (scl_rise) begin
        unique case (state)
          S_ADDR, S_PTR, S_WR: begin
            shreg  <= {shreg[6:0], sda_s[1]};
            bitcnt <= bitcnt + 4'd1;
          end
          S_RD:    bitcnt <= bitcnt + 4'd1;
          S_RACK:  nack   <= sda_s[1];
          default: ;
        endcase
      end else if (scl_fall) begin
        unique case (state)
          S_ADDR: if (bitcnt == 4'd8) begin
            if (shreg[7:1] == my_addr) begin
              sda_oe <= 1'b1;
              state  <= S_ACK_ADDR;
            end else begin
              state  <= S_IDLE;
            end
          end
          S_ACK_ADDR: begin
            bitcnt <= '0;
            if (shreg[0]) begin
              state  <= S_RD;
              sda_oe <= !rdbyte[7];
            end else begin
              state  <= S_PTR;
              sda_oe <= 1'b0;
            end
          end
          S_PTR: if (bitcnt == 4'd8) begin
            ptr    <= shreg;
            sda_oe <= 1'b1;
            state  <= S_ACK_PTR;
          end
          S_ACK_PTR, S_ACK_WR: begin
            sda_oe <= 1'b0;
            bitcnt <= '0;
            state  <= S_WR;
          end
          S_WR: if (bitcnt == 4'd8) begin
            regs[8*ptr[IW-1:0] +: 8] <= shreg;
            wr_strobe <= 1'b1;
            ptr       <= ptr + 8'd1;
            sda_oe    <= 1'b1;
            state     <= S_ACK_WR;
          end
          S_RD: begin
            if (bitcnt == 4'd8) begin
              sda_oe <= 1'b0;
              state  <= S_RACK;
            end else begin
              sda_oe <= !rdbyte[3'(7 - bitcnt)];
            end
          end
          S_RACK: begin
            if (nack) begin
              state <= S_IDLE;
            end else begin
              ptr    <= ptr + 8'd1;
              bitcnt <= '0;
              sda_oe <= !regs[8*nxt_idx + 7];
              state  <= S_RD;
            end
          end
          default: ;
        endcase
      end
    end
  end

endmodule
