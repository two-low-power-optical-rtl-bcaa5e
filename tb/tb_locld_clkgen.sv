// tb_locld_clkgen: the oscillator must be stopped when the bus is idle,
// start on a START condition (SDA falling while SCL is high) without any
// clock, keep running while busy after the request is acknowledged, and
// stop again when busy drops. A falling SDA with SCL low must not start it.
`timescale 1ps / 1ps
module tb_locld_clkgen;
  `include "tb_check.svh"
  logic scl, sda, busy, start_ack, start_req, clk;
  locld_clkgen dut (.scl, .sda, .busy, .start_ack, .start_req, .clk);
  int edges = 0;
  always @(posedge clk) edges++;
  initial begin
    scl = 1'b1; sda = 1'b1; busy = 1'b0; start_ack = 1'b1;
    #1000 start_ack = 1'b0;
    #100_000 edges = 0;
    #1_000_000;
    check(edges == 0, "no clock while idle");
    check(!start_req, "no request while idle");
    scl = 1'b0; #1000 sda = 1'b0; #1000 sda = 1'b1; #1000 scl = 1'b1;
    #500_000;
    check(edges == 0 && !start_req, "SDA edge with SCL low ignored");
    sda = 1'b0;                     // START
    #1000 check(start_req, "request on START");
    #1_000_000;
    check(edges >= 18 && edges <= 21, "runs at about 20 MHz");
    busy = 1'b1; start_ack = 1'b1;
    #1000 check(!start_req, "acknowledge clears request");
    start_ack = 1'b0;
    edges = 0;
    #1_000_000;
    check(edges >= 18, "runs while busy");
    busy = 1'b0;
    #100_000 edges = 0;
    #1_000_000;
    check(edges == 0, "stops when idle");
    finish_tb();
  end
  initial begin #10_000_000; failures++; $display("watchdog expired"); finish_tb(); end
endmodule
