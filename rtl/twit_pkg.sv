// twit_pkg: shared elaboration-time arithmetic for the twit-based modulo-(2^n +- delta)
// multiplier.
//
// A residue channel has modulus m = 2^n + delta (PLUS = 1) or m = 2^n - delta (PLUS = 0),
// 0 <= delta <= 2^(n-1)-1. An operand is an n-bit binary word plus one "twit" bit; the twit
// adds +delta (PLUS = 1) or -delta (PLUS = 0) when set. Every codeword is a valid residue.
//
// Nothing in this package becomes hardware on its own. The functions are evaluated while the
// design elaborates: they size the datapath (group count, carry-save widths, squeezing steps)
// and fill the constant look-up tables that realise the small fixed combinational blocks.
// Width rules for the carry-save datapath follow from bit counting: a 3:2 counter row yields
// a sum as wide as its widest input and a carry one bit wider than its second widest input.
package twit_pkg;

  // Maximum number of operands tracked by the width functions (Gamma^2 <= 36 for n <= 17).
  localparam int unsigned MAX_OPS = 64;

  // Modulus 2^n +- delta.
  function automatic longint modulus(int unsigned n, int unsigned delta, bit plus);
    return plus ? (longint'(1) << n) + longint'(delta) : (longint'(1) << n) - longint'(delta);
  endfunction

  // Signed value carried by a set twit.
  function automatic longint twit_value(int unsigned delta, bit plus);
    return plus ? longint'(delta) : -longint'(delta);
  endfunction

  // Non-negative remainder.
  function automatic longint mod_pos(longint x, longint m);
    longint r;
    r = x % m;
    if (r < 0) r = r + m;
    return r;
  endfunction

  // Number of operand groups, Gamma = 1 + ceil((n-2)/3).
  function automatic int unsigned num_groups(int unsigned n);
    return 1 + (n - 2 + 2) / 3;
  endfunction

  // Bit position of the least significant binary bit of group g (its positional weight).
  function automatic int unsigned group_lsb(int unsigned g);
    return (g == 0) ? 0 : 3 * g - 1;
  endfunction

  // Number of binary operand bits in group g (group 0 holds a1,a0 plus the twit).
  function automatic int unsigned group_bits(int unsigned n, int unsigned g);
    int unsigned rem;
    if (g == 0) return 2;
    rem = n - group_lsb(g);
    return (rem < 3) ? rem : 3;
  endfunction

  // Width of one modular partial product: n bits for 2^n-delta, n+1 for 2^n+delta.
  function automatic int unsigned pp_width(int unsigned n, bit plus);
    return plus ? n + 1 : n;
  endfunction

  // ---------------------------------------------------------------- reduction tree geometry

  // Number of operands present at level l of a tree that starts with num operands.
  function automatic int unsigned tree_count(int unsigned num, int unsigned l);
    int unsigned cnt;
    cnt = num;
    for (int unsigned i = 0; i < l; i++) begin
      if (cnt > 2) cnt = 2 * (cnt / 3) + (cnt % 3);
    end
    return cnt;
  endfunction

  // Number of 3:2 levels needed to bring num operands down to two.
  function automatic int unsigned tree_levels(int unsigned num);
    int unsigned cnt, l;
    cnt = num;
    l = 0;
    while (cnt > 2) begin
      cnt = 2 * (cnt / 3) + (cnt % 3);
      l++;
    end
    return l;
  endfunction

  // Common width of the two output vectors of a tree over num operands of width wi.
  function automatic int unsigned tree_width(int unsigned num, int unsigned wi);
    int unsigned w [MAX_OPS];
    int unsigned nw [MAX_OPS];
    int unsigned cnt, k, hi, lo, res;
    cnt = num;
    for (int unsigned i = 0; i < MAX_OPS; i++) begin
      w[i] = wi;
      nw[i] = 0;
    end
    while (cnt > 2) begin
      k = cnt / 3;
      for (int unsigned g = 0; g < k; g++) begin
        // widest and second widest of the three inputs
        hi = w[3*g];
        lo = 0;
        for (int unsigned j = 1; j < 3; j++) begin
          if (w[3*g+j] > hi) begin
            lo = hi;
            hi = w[3*g+j];
          end else if (w[3*g+j] > lo) begin
            lo = w[3*g+j];
          end
        end
        nw[2*g]   = hi;
        nw[2*g+1] = lo + 1;
      end
      for (int unsigned j = 0; j < cnt % 3; j++) nw[2*k+j] = w[3*k+j];
      cnt = 2 * k + cnt % 3;
      for (int unsigned i = 0; i < MAX_OPS; i++) w[i] = nw[i];
    end
    res = 0;
    for (int unsigned i = 0; i < cnt; i++) if (w[i] > res) res = w[i];
    return res;
  endfunction

  // ---------------------------------------------------------------- squeezing geometry

  // Width that stage 4 accepts: n+1 bits.
  function automatic int unsigned final_width(int unsigned n);
    return n + 1;
  endfunction

  // Cut position of one squeezing step on a pair of width w: the top three bits of each
  // vector, but never below bit n-1.
  function automatic int unsigned squeeze_cut(int unsigned w, int unsigned n);
    return (w >= n + 2) ? w - 3 : n - 1;
  endfunction

  // Width of the pair after one squeezing step: CSA of two cut-wide vectors and the
  // (n+1)-bit folded residue.
  function automatic int unsigned squeeze_next(int unsigned w, int unsigned n);
    int unsigned cut, sw, cw;
    cut = squeeze_cut(w, n);
    sw = (cut > n + 1) ? cut : n + 1;
    cw = cut + 1;
    return (sw > cw) ? sw : cw;
  endfunction

  // Width of the pair after k squeezing steps.
  function automatic int unsigned squeeze_width(int unsigned w0, int unsigned n, int unsigned k);
    int unsigned w;
    w = w0;
    for (int unsigned i = 0; i < k; i++) w = squeeze_next(w, n);
    return w;
  endfunction

  // Number of squeezing steps needed to reach the stage-4 width.
  function automatic int unsigned squeeze_steps(int unsigned w0, int unsigned n);
    int unsigned w, k;
    w = w0;
    k = 0;
    while (w > final_width(n)) begin
      w = squeeze_next(w, n);
      k++;
    end
    return k;
  endfunction

endpackage
