// Bit-banged I2C master for the testbenches. The including module declares
// `logic scl, sda_m;` (master drive, 1 = released) and `wire sda_bus`
// (the wired-AND bus value), and sets I2C_HALF_PS.
task automatic i2c_start();
  sda_m = 1'b1; scl = 1'b1; #(I2C_HALF_PS);
  sda_m = 1'b0; #(I2C_HALF_PS);
  scl = 1'b0; #(I2C_HALF_PS);
endtask

task automatic i2c_stop();
  sda_m = 1'b0; #(I2C_HALF_PS);
  scl = 1'b1; #(I2C_HALF_PS);
  sda_m = 1'b1; #(I2C_HALF_PS);
endtask

// Sends a byte, returns 1 when the slave acknowledged.
task automatic i2c_wbyte(input logic [7:0] b, output bit ack);
  for (int i = 7; i >= 0; i--) begin
    sda_m = b[i]; #(I2C_HALF_PS);
    scl = 1'b1;  #(I2C_HALF_PS);
    scl = 1'b0;
  end
  sda_m = 1'b1; #(I2C_HALF_PS);
  scl = 1'b1; #(I2C_HALF_PS / 2);
  ack = !sda_bus;
  #(I2C_HALF_PS - I2C_HALF_PS / 2);
  scl = 1'b0;
endtask

// Reads a byte and answers ACK (last = 0) or NACK (last = 1).
task automatic i2c_rbyte(input bit last, output logic [7:0] b);
  sda_m = 1'b1;
  for (int i = 7; i >= 0; i--) begin
    #(I2C_HALF_PS);
    scl = 1'b1; #(I2C_HALF_PS / 2);
    b[i] = sda_bus;
    #(I2C_HALF_PS - I2C_HALF_PS / 2);
    scl = 1'b0;
  end
  sda_m = last; #(I2C_HALF_PS);
  scl = 1'b1; #(I2C_HALF_PS);
  scl = 1'b0;
  sda_m = 1'b1;
endtask

// Writes n bytes from d to consecutive registers starting at ptr.
task automatic i2c_write(input logic [6:0] dev, input logic [7:0] ptr,
                         input logic [7:0] d [], output bit ok);
  bit a;
  ok = 1;
  i2c_start();
  i2c_wbyte({dev, 1'b0}, a); ok &= a;
  i2c_wbyte(ptr, a);         ok &= a;
  foreach (d[i]) begin i2c_wbyte(d[i], a); ok &= a; end
  i2c_stop();
endtask

// Reads n bytes starting at ptr (pointer write, repeated START, read).
task automatic i2c_read(input logic [6:0] dev, input logic [7:0] ptr, input int n,
                        output logic [7:0] d [], output bit ok);
  bit a;
  ok = 1;
  d = new[n];
  i2c_start();
  i2c_wbyte({dev, 1'b0}, a); ok &= a;
  i2c_wbyte(ptr, a);         ok &= a;
  sda_m = 1'b1; #(I2C_HALF_PS); scl = 1'b1; #(I2C_HALF_PS);   // repeated START
  sda_m = 1'b0; #(I2C_HALF_PS); scl = 1'b0; #(I2C_HALF_PS);
  i2c_wbyte({dev, 1'b1}, a); ok &= a;
  for (int i = 0; i < n; i++) i2c_rbyte(i == n - 1, d[i]);
  i2c_stop();
endtask
