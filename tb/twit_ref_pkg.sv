// twit_ref_pkg: reference arithmetic for the testbenches, written independently of the RTL
// package. It decodes a twit codeword (n-bit word x plus twit t) to the residue it stands for,
// x + t*delta (2^n + delta) or x - t*delta (2^n - delta), reduced into [0, m-1].
package twit_ref_pkg;

  function automatic longint ref_mod(int n, int delta, bit plus);
    return plus ? (64'sd1 <<< n) + longint'(delta) : (64'sd1 <<< n) - longint'(delta);
  endfunction

  function automatic longint ref_norm(longint x, longint m);
    longint r;
    r = x % m;
    return (r < 0) ? r + m : r;
  endfunction

  function automatic longint ref_decode(longint x, bit t, int n, int delta, bit plus);
    longint v;
    v = x + (t ? (plus ? longint'(delta) : -longint'(delta)) : 0);
    return ref_norm(v, ref_mod(n, delta, plus));
  endfunction

endpackage
