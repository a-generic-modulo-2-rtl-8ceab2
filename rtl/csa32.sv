// csa32: a row of 3:2 counters (carry-save adder).
//
// Adds three W-bit vectors without carry propagation: every bit position is a full adder
// whose sum bit stays in place and whose carry bit moves one position up. The outputs satisfy
// x + y + z = s + c exactly; c is one bit wider than the inputs so nothing is lost.
// Interface: s is W bits, c is W+1 bits with c[0] = 0. Timing: combinational, one full-adder
// delay. This is the textbook counter row the paper builds its reduction tree from.
module csa32 #(
  parameter int unsigned W = 8
) (
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  input  logic [W-1:0] z,
  output logic [W-1:0] s,
  output logic [W:0]   c
);

  assign s = x ^ y ^ z;
  assign c = {(x & y) | (x & z) | (y & z), 1'b0};

endmodule
