// twit_ppg: operand splitting and partial-product generation (stages 1 and 2).
//
// Both twit operands are split into Gamma = 1 + ceil((n-2)/3) groups: group 0 is the twit
// with the two lowest binary bits, group g >= 1 holds bits 3g+1..3g-1 (absent bits of the top
// group are left out). Every pair of groups (gamma of A, eta of B) feeds its own 6-input
// modular partial-product table, giving Gamma^2 residues that the reduction tree sums.
//
// Interface: pp[eta*Gamma + gamma] = |g^A_gamma * g^B_eta|_m, i.e. the order
// g0B*g0A, g0B*g1A, ..., as the rows are labelled in the paper's overall structure figure.
// Timing: purely combinational (one table look-up deep).
//
// Grouping and product definition follow the paper. Splitting is wiring only, so it shares
// this module with the generators.
module twit_ppg #(
  parameter int unsigned N     = 5,
  parameter int unsigned DELTA = 15,
  parameter bit          PLUS  = 1'b1,
  localparam int unsigned G    = twit_pkg::num_groups(N),
  localparam int unsigned PPW  = twit_pkg::pp_width(N, PLUS)
) (
  input  logic [N-1:0]   a,
  input  logic           a_tw,
  input  logic [N-1:0]   b,
  input  logic           b_tw,
  output logic [PPW-1:0] pp [G*G]
);

  // Stage 1: the operand groups, right-aligned in 3-bit fields.
  logic [2:0] ga [G];
  logic [2:0] gb [G];

  assign ga[0] = {a_tw, a[1:0]};
  assign gb[0] = {b_tw, b[1:0]};

  for (genvar g = 1; g < G; g++) begin : g_split
    localparam int unsigned LSB = twit_pkg::group_lsb(g);
    localparam int unsigned NB  = twit_pkg::group_bits(N, g);
    if (NB == 3) begin : g_full
      assign ga[g] = a[LSB +: 3];
      assign gb[g] = b[LSB +: 3];
    end else begin : g_part
      assign ga[g] = 3'(a[N-1:LSB]);
      assign gb[g] = 3'(b[N-1:LSB]);
    end
  end

  // Stage 2: one table per group pair.
  for (genvar e = 0; e < G; e++) begin : g_eta
    for (genvar g = 0; g < G; g++) begin : g_gamma
      twit_pp_lut #(.N(N), .DELTA(DELTA), .PLUS(PLUS), .GA(g), .GB(e)) u_pp (
        .ga(ga[g]),
        .gb(gb[e]),
        .pp(pp[e*G + g])
      );
    end
  end

endmodule
