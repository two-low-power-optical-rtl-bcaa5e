// tmr_voter: bitwise 2-of-3 majority voter with output register.
//
// This is the "majority voter and latch" that the paper places after the
// triplicated frame builder of the LOCic-130 encoder: any single corrupted
// copy is outvoted. y is the combinational vote, q the vote registered on
// clk (the paper does not say whether a latch or a flip-flop is used; a
// flip-flop is used here). Also used for the voted outputs of other
// triplicated logic.
`timescale 1ps / 1ps
module tmr_voter #(
  parameter int unsigned W = 30
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  output logic [W-1:0] y,
  output logic [W-1:0] q,
  output logic         mismatch    // registered: the copies disagreed
);

  assign y = (a & b) | (a & c) | (b & c);

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      q        <= '0;
      mismatch <= 1'b0;
    end else begin
      q        <= y;
      mismatch <= (a != b) || (a != c);
    end
  end

endmodule
