// csa_tree: multi-operand carry-save reduction (stage 3).
//
// Reduces NUM operands of WI bits to a depth-two carry-save pair (s, c) with s + c equal to
// the sum of all operands. Each level groups the operands three at a time, in index order,
// into 3:2 counter rows; the sum and carry of group k become operands 2k and 2k+1 of the next
// level and the one or two operands left over follow them unchanged. The number of levels is
// the smallest lambda that leaves two operands (lambda = 2 for four operands, i.e. a 4:2
// compressor built from two counter rows).
//
// Interface: ops[NUM] in, s and c out, both WT bits wide. WT is the exact bound from bit
// counting (sum as wide as the widest input, carry one bit wider than the second widest), so
// the carry bit that a counter row pushes above WT is always zero and is dropped.
// Timing: combinational, lambda full-adder delays, no carry propagation.
//
// The tree of 3:2 counters and the depth-two result follow the paper; the grouping order is
// this design's choice (for four operands it gives the intermediate rows the paper prints).
module csa_tree #(
  parameter int unsigned NUM = 4,
  parameter int unsigned WI  = 6,
  localparam int unsigned WT = twit_pkg::tree_width(NUM, WI)
) (
  input  logic [WI-1:0] ops [NUM],
  output logic [WT-1:0] s,
  output logic [WT-1:0] c
);

  localparam int unsigned L = twit_pkg::tree_levels(NUM);

  logic [WT-1:0] lv0 [NUM];

  for (genvar i = 0; i < NUM; i++) begin : g_in
    assign lv0[i] = WT'(ops[i]);
  end

  // Level l reads the operands of level l-1 (lv0 for l = 0) and drives its own 'o'.
  for (genvar l = 0; l < L; l++) begin : g_lvl
    localparam int unsigned CNT  = twit_pkg::tree_count(NUM, l);
    localparam int unsigned K    = CNT / 3;
    localparam int unsigned LEFT = CNT % 3;
    localparam int unsigned NEXT = 2 * K + LEFT;

    logic [WT-1:0] in [NUM];
    logic [WT-1:0] o  [NUM];

    if (l == 0) begin : g_first
      assign in = lv0;
    end else begin : g_next
      assign in = g_lvl[l-1].o;
    end

    for (genvar k = 0; k < K; k++) begin : g_csa
      logic [WT:0] cw;
      csa32 #(.W(WT)) u_csa (
        .x(in[3*k]),
        .y(in[3*k+1]),
        .z(in[3*k+2]),
        .s(o[2*k]),
        .c(cw)
      );
      // cw[WT] is provably zero (see the width rule above).
      assign o[2*k+1] = cw[WT-1:0];
    end
    for (genvar j = 0; j < LEFT; j++) begin : g_pass
      assign o[2*K+j] = in[3*K+j];
    end
    for (genvar j = NEXT; j < NUM; j++) begin : g_unused
      assign o[j] = '0;
    end
  end

  if (L == 0) begin : g_none
    assign s = lv0[0];
    if (NUM >= 2) begin : g_c
      assign c = lv0[1];
    end else begin : g_z
      assign c = '0;
    end
  end else begin : g_out
    assign s = g_lvl[L-1].o[0];
    assign c = g_lvl[L-1].o[1];
  end

endmodule
