// twit_fold_lut: overflow-folding logic of the squeezing step.
//
// A carry-save pair that has grown wider than the channel carries part of its value in high
// bit positions. Since 2^n = -+delta modulo 2^n +- delta, that part can be replaced by a small
// residue. This block takes WH high bits from each of the two vectors, both starting at bit
// POS, and returns f = |2^POS * (hs + hc)|_m in [0, m-1]. With at most six inputs it is a
// fixed truth table computed at elaboration.
//
// Interface: hs, hc are WH bits (WH <= 3 keeps the block at six inputs); f is n+1 bits.
// Timing: purely combinational.
//
// The folding identity and the six-input limit follow the paper; the canonical residue as
// the output code is this design's choice.
module twit_fold_lut #(
  parameter int unsigned N     = 5,
  parameter int unsigned DELTA = 15,
  parameter bit          PLUS  = 1'b1,
  parameter int unsigned WH    = 3,
  parameter int unsigned POS   = 4
) (
  input  logic [WH-1:0] hs,
  input  logic [WH-1:0] hc,
  output logic [N:0]    f
);

  localparam longint      M  = twit_pkg::modulus(N, DELTA, PLUS);
  localparam int unsigned NI = 2 * WH;
  localparam int unsigned NE = 1 << NI;

  function automatic logic [NE*(N+1)-1:0] build_lut();
    logic [NE*(N+1)-1:0] t;
    longint hsum, r;
    t = '0;
    for (int i = 0; i < NE; i++) begin
      hsum = longint'(i) % (longint'(1) << WH) + (longint'(i) >> WH);
      r = twit_pkg::mod_pos(hsum * (longint'(1) << POS), M);
      t[i*(N+1) +: N+1] = (N+1)'(r);
    end
    return t;
  endfunction

  localparam logic [NE*(N+1)-1:0] LUT = build_lut();

  logic [NI-1:0] idx;
  assign idx = {hc, hs};
  assign f   = LUT[idx*(N+1) +: N+1];

endmodule
