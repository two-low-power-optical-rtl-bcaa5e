// locld_clkgen: behavioural model of the LOCld-130 I2C clock generator.
//
// In the chip this is a low-frequency ring oscillator made of standard
// inverter and delay cells, triplicated against upsets. It runs only while
// the I2C slave is talking, so the configuration logic draws no dynamic
// power once the chip is set up. This model is not synthesizable (the ring
// is a delay loop): a START on the bus (SDA falling while SCL is high) sets
// a request flag without any clock; while the flag or the core's busy is
// set the oscillator runs; the core acknowledges the flag (start_ack),
// which clears it, and the oscillator stops when the core is idle again.
// The behaviour follows the paper; the frequency (HALF_PS half period,
// 25 ns -> 20 MHz) and the start/stop rule are this model's assumptions.
`timescale 1ps / 1ps
module locld_clkgen #(
  parameter int unsigned HALF_PS = 25000
) (
  input  logic scl,
  input  logic sda,
  input  logic busy,
  input  logic start_ack,
  output logic start_req,
  output logic clk
);

  logic run;

  initial begin
    start_req = 1'b0;
    clk       = 1'b0;
  end

  // START detector: asynchronous, no clock needed
  always @(negedge sda or posedge start_ack) begin
    if (start_ack) start_req <= 1'b0;
    else if (scl)  start_req <= 1'b1;
  end

  assign run = start_req || busy;

  always begin
    if (run) begin
      #(HALF_PS) clk = 1'b1;
      #(HALF_PS) clk = 1'b0;
    end else begin
      @(posedge run);
    end
  end

endmodule
