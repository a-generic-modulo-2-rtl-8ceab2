// pow2_mod_mul: multiplier for the power-of-two channel 2^W of the RNS set.
//
// Modulo 2^W a product is simply its low W bits, so this channel needs neither twit nor
// reduction: it is a W x W binary multiplier truncated to W bits. In the 12-channel n = 5 set
// the channel is 2^(2n) = 1024 (W = 10). The paper names the channel but not its multiplier;
// the truncated product is the plain choice. Timing: purely combinational.
module pow2_mod_mul #(
  parameter int unsigned W = 10
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] p
);

  assign p = a * b;

endmodule
