// twit_final_add: twit-compatible final modular addition (stage 4).
//
// Input is a carry-save pair (s, c) of at most n+1 bits whose sum is congruent to the
// product. The bits from position P4 upward of both vectors (P4 = n-1 for 2^n - delta,
// P4 = n-2 for 2^n + delta) go to a fixed table that rewrites their value U as an n-bit word
// V plus a twit t', with V + t'*(+-delta) = U (mod m). V is added to the two low parts (bits
// below P4, so the column at n-2 is empty for 2^n + delta) with one 3:2 counter row and one
// (n+1)-bit carry-propagate adder. A carry-out stands for 2^n = -+delta; the table is built
// so that a carry-out can only appear when t' = 1, where it cancels the twit. The output twit
// is therefore t' XOR carry-out.
//
// Table rule (this design's choice; the paper gives only the function):
//   2^n - delta: V = |U + delta|_m, t' = 1.
//   2^n + delta: u = |U|_m; V = u - delta, t' = 1 if u >= delta, else V = u, t' = 0.
// For 2^n + delta with t' = 0 the low parts are below 2^(n-1)-1 and V below delta, so no
// carry-out; the assertion below checks this rule at simulation time.
//
// Interface: s, c in (W bits); p (n bits) and p_tw out, a valid twit codeword that need not
// be the canonical one. Timing: combinational (table, full adder, (n+1)-bit adder, XOR).
module twit_final_add #(
  parameter int unsigned N     = 5,
  parameter int unsigned DELTA = 15,
  parameter bit          PLUS  = 1'b1,
  parameter int unsigned W     = 6
) (
  input  logic [W-1:0] s,
  input  logic [W-1:0] c,
  output logic [N-1:0] p,
  output logic         p_tw
);

  localparam longint      M   = twit_pkg::modulus(N, DELTA, PLUS);
  localparam int unsigned P4  = PLUS ? N - 2 : N - 1;
  localparam int unsigned WH  = W - P4;
  localparam int unsigned NE  = 1 << (2 * WH);

  // Entry: {t', V}.
  function automatic logic [NE*(N+1)-1:0] build_lut();
    logic [NE*(N+1)-1:0] t;
    longint u, v;
    logic tw;
    t = '0;
    for (int i = 0; i < NE; i++) begin
      u = twit_pkg::mod_pos((longint'(i) % (longint'(1) << WH) + (longint'(i) >> WH)) * (longint'(1) << P4), M);
      if (!PLUS) begin
        v  = twit_pkg::mod_pos(u + longint'(DELTA), M);
        tw = 1'b1;
      end else if (u >= longint'(DELTA)) begin
        v  = u - longint'(DELTA);
        tw = 1'b1;
      end else begin
        v  = u;
        tw = 1'b0;
      end
      t[i*(N+1) +: N+1] = {tw, N'(v)};
    end
    return t;
  endfunction

  localparam logic [NE*(N+1)-1:0] LUT = build_lut();

  logic [2*WH-1:0] idx;
  logic [N-1:0]    v;
  logic            tw_pre;
  logic [N-1:0]    s4;
  logic [N:0]      c4;
  logic [N:0]      sum;
  logic            cout;

  assign idx          = {c[W-1:P4], s[W-1:P4]};
  assign {tw_pre, v}  = LUT[idx*(N+1) +: N+1];

  csa32 #(.W(N)) u_csa (
    .x(N'(s[P4-1:0])),
    .y(N'(c[P4-1:0])),
    .z(v),
    .s(s4),
    .c(c4)
  );

  assign sum  = (N+1)'(s4) + c4;
  assign cout = sum[N];
  assign p    = sum[N-1:0];
  assign p_tw = tw_pre ^ cout;

  always_comb begin
    if (cout) assert (tw_pre) else $error("carry-out with twit 0 cannot be represented");
  end

endmodule
