// twit_squeeze: width reduction ("squeezing") of the carry-save pair before stage 4.
//
// The reduction tree can leave a pair wider than the final adder accepts (n+1 bits). Each
// squeezing step cuts both vectors at bit CUT = max(n-1, W-3), folds the bits above the cut
// (at most three per vector, six in total) into one residue with twit_fold_lut, and adds that
// residue to the two remaining low parts with one 3:2 counter row. A step shortens the pair by
// at least one bit and the value it represents stays congruent modulo m. For n = 5 with
// 2^5 + delta one step takes the 7-bit pair to 6 bits; for 2^5 - delta no step is needed and
// the pair passes through unchanged.
//
// Interface: s, c in (W0 bits); so, co out (WF bits, WF <= n+1).
// Timing: combinational, STEPS x (table + full adder).
//
// Folding with six-input blocks and carry-save accumulation follow the paper; the target
// width n+1 follows its n = 5 case study, and the cut rule for wider pairs is this design's.
module twit_squeeze #(
  parameter int unsigned N      = 5,
  parameter int unsigned DELTA  = 15,
  parameter bit          PLUS   = 1'b1,
  parameter int unsigned W0     = 7,
  localparam int unsigned STEPS = twit_pkg::squeeze_steps(W0, N),
  localparam int unsigned WF    = twit_pkg::squeeze_width(W0, N, STEPS)
) (
  input  logic [W0-1:0] s,
  input  logic [W0-1:0] c,
  output logic [WF-1:0] so,
  output logic [WF-1:0] co
);

  // Pair after each step, held at the input width (bits above the step's width are zero).
  logic [W0-1:0] ss [STEPS+1];
  logic [W0-1:0] cc [STEPS+1];

  assign ss[0] = s;
  assign cc[0] = c;

  for (genvar k = 0; k < STEPS; k++) begin : g_step
    localparam int unsigned W   = twit_pkg::squeeze_width(W0, N, k);
    localparam int unsigned CUT = twit_pkg::squeeze_cut(W, N);
    localparam int unsigned WH  = W - CUT;
    localparam int unsigned WN  = twit_pkg::squeeze_next(W, N);

    logic [N:0]  f;
    logic [WN-1:0] snew;
    logic [WN:0]   cnew;

    twit_fold_lut #(.N(N), .DELTA(DELTA), .PLUS(PLUS), .WH(WH), .POS(CUT)) u_fold (
      .hs(ss[k][W-1:CUT]),
      .hc(cc[k][W-1:CUT]),
      .f (f)
    );

    csa32 #(.W(WN)) u_csa (
      .x(WN'(ss[k][CUT-1:0])),
      .y(WN'(cc[k][CUT-1:0])),
      .z(WN'(f)),
      .s(snew),
      .c(cnew)
    );

    assign ss[k+1] = W0'(snew);
    assign cc[k+1] = W0'(cnew[WN-1:0]);
  end

  assign so = ss[STEPS][WF-1:0];
  assign co = cc[STEPS][WF-1:0];

endmodule
