// rns_mul_n5: 12-channel residue-number-system multiplier with 5-bit twit channels.
//
// The moduli {17, 19, 23, 29, 31, 35, 37, 39, 41, 43, 47, 1024} are pairwise coprime and their
// product, about 2^65, is the dynamic range. The first five are 2^5 - delta with
// delta = 15, 13, 9, 3, 1; the next six are 2^5 + delta with delta = 3, 5, 7, 9, 11, 15; the
// last is 2^10. A multiplication of two numbers held in this RNS is eleven independent twit
// channel multiplications plus one 10-bit multiplication modulo 1024, all side by side with
// no signal crossing between channels.
//
// Interface: index i of a_res/a_tw/b_res/b_tw/p_res/p_tw belongs to modulus CH_MOD[i]
// (i = 0..10, in the order above); a_p2/b_p2/p_p2 are the residues modulo 1024.
// Timing: purely combinational; the critical path is the slowest channel.
//
// The modulus set follows the paper's n = 5 case study; the channel order and port layout
// are this design's choice.
module rns_mul_n5 (
  input  logic [4:0] a_res [11],
  input  logic       a_tw  [11],
  input  logic [4:0] b_res [11],
  input  logic       b_tw  [11],
  input  logic [9:0] a_p2,
  input  logic [9:0] b_p2,
  output logic [4:0] p_res [11],
  output logic       p_tw  [11],
  output logic [9:0] p_p2
);

  localparam int unsigned N   = 5;
  localparam int unsigned NCH = 11;
  localparam int unsigned CH_DELTA [NCH] = '{15, 13, 9, 3, 1, 3, 5, 7, 9, 11, 15};
  localparam bit          CH_PLUS  [NCH] = '{0, 0, 0, 0, 0, 1, 1, 1, 1, 1, 1};

  for (genvar i = 0; i < NCH; i++) begin : g_ch
    twit_mod_mul #(.N(N), .DELTA(CH_DELTA[i]), .PLUS(CH_PLUS[i])) u_mul (
      .a   (a_res[i]),
      .a_tw(a_tw[i]),
      .b   (b_res[i]),
      .b_tw(b_tw[i]),
      .p   (p_res[i]),
      .p_tw(p_tw[i])
    );
  end

  pow2_mod_mul #(.W(2 * N)) u_p2 (
    .a(a_p2),
    .b(b_p2),
    .p(p_p2)
  );

endmodule
