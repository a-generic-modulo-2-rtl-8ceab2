// twit_mod_mul: one RNS channel, A x B modulo 2^n +- delta in twit representation.
//
// Operands and result are n-bit binary words plus a twit (1 = +delta for 2^n + delta,
// -delta for 2^n - delta). The product is never formed in binary. Instead:
//   1. each operand is split into 3-bit groups (the twit rides in group 0);
//   2. every pair of groups gives a residue |g^A_gamma * g^B_eta|_m from a 6-input table;
//   3. a tree of 3:2 counters sums the Gamma^2 residues into a carry-save pair;
//   (squeezing) when the pair is wider than n+1 bits its high bits are folded back;
//   4. the high bits of the pair become an n-bit word plus twit, a single carry-propagate
//      adder adds it to the low bits, and the carry-out corrects the twit.
// The only carry propagation is the (n+1)-bit adder at the end.
//
// Parameters: N (n), DELTA (0 <= delta <= 2^(n-1)-1) and PLUS (1 for 2^n + delta). Defaults
// are the worked example of the paper, m = 2^5 + 15 = 47.
// Timing: purely combinational; no registers, no handshake.
//
// The four stages and the squeezing step follow the paper; the encoding of the stage-4 table
// and the squeezing cut rule are this design's choices (see those modules).
module twit_mod_mul #(
  parameter int unsigned N     = 5,
  parameter int unsigned DELTA = 15,
  parameter bit          PLUS  = 1'b1
) (
  input  logic [N-1:0] a,
  input  logic         a_tw,
  input  logic [N-1:0] b,
  input  logic         b_tw,
  output logic [N-1:0] p,
  output logic         p_tw
);

  localparam int unsigned G   = twit_pkg::num_groups(N);
  localparam int unsigned PPW = twit_pkg::pp_width(N, PLUS);
  localparam int unsigned WT  = twit_pkg::tree_width(G * G, PPW);
  localparam int unsigned WF  = twit_pkg::squeeze_width(WT, N, twit_pkg::squeeze_steps(WT, N));

  initial begin
    assert (N >= 3 && DELTA <= (1 << (N - 1)) - 1)
      else $fatal(1, "twit_mod_mul: need n >= 3 and delta <= 2^(n-1)-1");
  end

  logic [PPW-1:0] pp [G*G];
  logic [WT-1:0]  rs, rc;
  logic [WF-1:0]  qs, qc;

  twit_ppg #(.N(N), .DELTA(DELTA), .PLUS(PLUS)) u_ppg (
    .a(a), .a_tw(a_tw), .b(b), .b_tw(b_tw), .pp(pp)
  );

  csa_tree #(.NUM(G * G), .WI(PPW)) u_tree (
    .ops(pp), .s(rs), .c(rc)
  );

  twit_squeeze #(.N(N), .DELTA(DELTA), .PLUS(PLUS), .W0(WT)) u_sq (
    .s(rs), .c(rc), .so(qs), .co(qc)
  );

  twit_final_add #(.N(N), .DELTA(DELTA), .PLUS(PLUS), .W(WF)) u_fin (
    .s(qs), .c(qc), .p(p), .p_tw(p_tw)
  );

endmodule
