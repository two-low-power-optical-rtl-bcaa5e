// tb_i2c_slave_core: register writes and reads over I2C, address
// matching with the address pins, power-up defaults, and no answer to a
// foreign address. The core runs on a 40 MHz clock, SCL at 400 kHz.
`timescale 1ps / 1ps
module tb_i2c_slave_core;
  localparam int unsigned I2C_HALF_PS = 1_250_000;
  `include "tb_check.svh"
  logic clk, rst, scl, sda_m, sda_oe, ext_start, start_ack, busy, wr_strobe;
  wire  sda_bus = sda_m & !sda_oe;
  logic [31:0] regs;
  `include "i2c_master.svh"

  i2c_slave_core #(.NREGS(4), .ADDR_PINS(3), .ADDR_BASE(7'h50), .DEFAULTS(32'hA1B2C3D4)) dut (
    .clk, .rst, .scl, .sda_in(sda_bus), .sda_oe, .addr_pins(3'd5), .ext_start,
    .start_ack, .busy, .regs, .wr_strobe
  );

  initial clk = 1'b0;
  always #12500 clk = ~clk;
  int n_wr = 0;
  always @(posedge clk) if (wr_strobe) n_wr++;

  initial begin
    logic [7:0] d [];
    logic [7:0] r [];
    bit ok;
    rst = 1'b0; scl = 1'b1; sda_m = 1'b1; ext_start = 1'b0;
    #1000 rst = 1'b1; #100000 rst = 1'b0; #100000;
    check(regs == 32'hA1B2C3D4, "defaults after reset");
    d = new[2]; d[0] = 8'h3C; d[1] = 8'h5A;
    i2c_write(7'h55, 8'd1, d, ok);
    check(ok, "write acknowledged");
    check(regs == 32'hA1_5A_3C_D4, "registers 1 and 2 written");
    check(n_wr == 2, "two write strobes");
    i2c_read(7'h55, 8'd0, 4, r, ok);
    check(ok, "read acknowledged");
    check({r[3], r[2], r[1], r[0]} == 32'hA15A3CD4, "read back all four registers");
    d = new[1]; d[0] = 8'hFF;
    i2c_write(7'h54, 8'd0, d, ok);
    check(!ok, "foreign address not acknowledged");
    check(regs == 32'hA1_5A_3C_D4, "foreign write ignored");
    check(!busy, "idle after STOP");
    finish_tb();
  end

  initial begin
    #(64'd2_000_000_000);
    failures++;
    $display("watchdog expired");
    finish_tb();
  end
endmodule
