// tb_locld_130: the LOCld-130 configuration path with its gated ring
// oscillator: power-up currents, an I2C write of all four codes, read-back,
// and the oscillator running only during the transactions.
`timescale 1ps / 1ps
module tb_locld_130;
  localparam int unsigned I2C_HALF_PS = 1_250_000;
  `include "tb_check.svh"
  logic por, scl, sda_m, sda_oe, running;
  wire  sda_bus = sda_m & !sda_oe;
  logic [5:0] mod_code [2], bias_code [2];
  `include "i2c_master.svh"
  locld_130 dut (
    .por, .scl, .sda_in(sda_bus), .sda_oe, .addr_pins(3'd7),
    .mod_code, .bias_code, .i2c_clk_running(running)
  );
  int osc_edges = 0;
  always @(posedge dut.clk) osc_edges++;
  initial begin
    logic [7:0] d [];
    logic [7:0] r [];
    bit ok;
    int e0;
    por = 1'b0; scl = 1'b1; sda_m = 1'b1;
    #1000 por = 1'b1; #100000 por = 1'b0; osc_edges = 0; #1_000_000;
    check(mod_code[0] == 6'd47 && bias_code[0] == 6'd15 &&
          mod_code[1] == 6'd47 && bias_code[1] == 6'd15, "power-up 8 mA / 3 mA codes");
    check(osc_edges == 0, "oscillator off after power-up");
    d = new[4]; d[0] = 8'd33; d[1] = 8'd7; d[2] = 8'd1; d[3] = 8'd44;
    i2c_write(7'h67, 8'd0, d, ok);
    check(ok, "write acknowledged");
    check(mod_code[0] == 6'd33 && bias_code[0] == 6'd7 &&
          mod_code[1] == 6'd1 && bias_code[1] == 6'd44, "codes written");
    check(osc_edges > 100, "oscillator ran during the transaction");
    #2_000_000 e0 = osc_edges;
    #5_000_000;
    check(osc_edges == e0 && !running, "oscillator stopped after STOP");
    i2c_read(7'h67, 8'd0, 4, r, ok);
    check(ok && r[0] == 8'd33 && r[3] == 8'd44, "read-back");
    d = new[1]; d[0] = 8'd0;
    i2c_write(7'h66, 8'd0, d, ok);
    check(!ok && mod_code[0] == 6'd33, "other address ignored");
    finish_tb();
  end
  initial begin #(64'd2_000_000_000); failures++; $display("watchdog expired"); finish_tb(); end
endmodule
