// tb_locld_i2c_tmr: power-up codes (modulation 47 = 8 mA, bias 15 = 3 mA
// on both channels), writes and read-back over I2C, and masking of one
// upset copy: copy 0's register file is overwritten behind the bus and the
// voted codes and read-back data must not change.
`timescale 1ps / 1ps
module tb_locld_i2c_tmr;
  localparam int unsigned I2C_HALF_PS = 1_250_000;
  `include "tb_check.svh"
  logic clk, rst, scl, sda_m, sda_oe, ext_start, start_ack, busy;
  wire  sda_bus = sda_m & !sda_oe;
  logic [5:0] mod_code [2], bias_code [2];
  `include "i2c_master.svh"
  locld_i2c_tmr dut (
    .clk, .rst, .scl, .sda_in(sda_bus), .sda_oe, .addr_pins(3'd2), .ext_start,
    .start_ack, .busy, .mod_code, .bias_code
  );
  initial clk = 1'b0;
  always #25000 clk = ~clk;
  initial begin
    logic [7:0] d [];
    logic [7:0] r [];
    bit ok;
    rst = 1'b0; scl = 1'b1; sda_m = 1'b1; ext_start = 1'b0;
    #1000 rst = 1'b1; #200000 rst = 1'b0; #200000;
    check(mod_code[0] == 6'd47 && mod_code[1] == 6'd47, "default modulation code");
    check(bias_code[0] == 6'd15 && bias_code[1] == 6'd15, "default bias code");
    d = new[4]; d[0] = 8'd10; d[1] = 8'd20; d[2] = 8'd63; d[3] = 8'd5;
    i2c_write(7'h62, 8'd0, d, ok);
    check(ok, "write acknowledged");
    check(mod_code[0] == 6'd10 && bias_code[0] == 6'd20, "channel 0 codes");
    check(mod_code[1] == 6'd63 && bias_code[1] == 6'd5, "channel 1 codes");
    // upset copy 0
    force dut.g_core[0].u_core.regs = 32'hFFFF_FFFF;
    #100000;
    check(mod_code[0] == 6'd10 && bias_code[1] == 6'd5, "upset copy outvoted");
    i2c_read(7'h62, 8'd0, 4, r, ok);
    check(ok && r[0] == 8'd10 && r[1] == 8'd20 && r[2] == 8'd63 && r[3] == 8'd5,
          "read-back with one copy upset");
    release dut.g_core[0].u_core.regs;
    finish_tb();
  end
  initial begin #(64'd2_000_000_000); failures++; $display("watchdog expired"); finish_tb(); end
endmodule
