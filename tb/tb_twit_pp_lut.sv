// tb_twit_pp_lut: exhaustive check of the 6-input partial-product tables for several channels
// and group pairs, against products of the group values computed here, plus the partial
// products printed in the paper's worked example (m = 47 and m = 17, delta = 15).
module tb_twit_pp_lut;
  import twit_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [2:0] ga, gb;
  logic [5:0] pp_a;   // n=5, 2^5+15, g1A x g0B
  logic [4:0] pp_b;   // n=5, 2^5-15, g0A x g1B
  logic [8:0] pp_c;   // n=8, 2^8+9,  g2A x g1B
  logic [10:0] pp_d;  // n=11, 2^11-3, g3A x g3B
  logic [5:0] pp_e;   // n=5, 2^5+15, g0A x g0B

  twit_pp_lut #(.N(5),  .DELTA(15), .PLUS(1), .GA(1), .GB(0)) ua (.ga(ga), .gb(gb), .pp(pp_a));
  twit_pp_lut #(.N(5),  .DELTA(15), .PLUS(0), .GA(0), .GB(1)) ub (.ga(ga), .gb(gb), .pp(pp_b));
  twit_pp_lut #(.N(8),  .DELTA(9),  .PLUS(1), .GA(2), .GB(1)) uc (.ga(ga), .gb(gb), .pp(pp_c));
  twit_pp_lut #(.N(11), .DELTA(3),  .PLUS(0), .GA(3), .GB(3)) ud (.ga(ga), .gb(gb), .pp(pp_d));
  twit_pp_lut #(.N(5),  .DELTA(15), .PLUS(1), .GA(0), .GB(0)) ue (.ga(ga), .gb(gb), .pp(pp_e));

  function automatic longint gval(int n, int delta, bit plus, int g, logic [2:0] bits);
    int lsb, nb;
    if (g == 0) return longint'(bits[1:0]) + (bits[2] ? (plus ? delta : -delta) : 0);
    lsb = 3 * g - 1;
    nb = (n - lsb < 3) ? n - lsb : 3;
    return longint'(bits & 3'((1 << nb) - 1)) <<< lsb;
  endfunction

  function automatic longint expect_pp(int n, int delta, bit plus, int g_a, int g_b);
    return ref_norm(gval(n, delta, plus, g_a, ga) * gval(n, delta, plus, g_b, gb), ref_mod(n, delta, plus));
  endfunction

  task automatic chk(string name, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s ga=%b gb=%b got=%0d exp=%0d", name, ga, gb, got, exp);
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 64; i++) begin
      ga = 3'(i); gb = 3'(i >> 3);
      @(posedge clk);
      chk("a", longint'(pp_a), expect_pp(5, 15, 1, 1, 0));
      chk("b", longint'(pp_b), expect_pp(5, 15, 0, 0, 1));
      chk("c", longint'(pp_c), expect_pp(8, 9, 1, 2, 1));
      chk("d", longint'(pp_d), expect_pp(11, 3, 0, 3, 3));
      chk("e", longint'(pp_e), expect_pp(5, 15, 1, 0, 0));
    end
    // Worked example, m = 47: A = 11011 twit 1, B = 10101 twit 0.
    ga = 3'b110; gb = 3'b001; @(posedge clk); chk("fig-a g0B*g1A", longint'(pp_a), 24);
    ga = 3'b111; gb = 3'b001; @(posedge clk); chk("fig-a g0B*g0A", longint'(pp_e), 18);
    // Worked example, m = 17: g1B = 101, g0A = {1,11}: 01111.
    ga = 3'b111; gb = 3'b101; @(posedge clk); chk("fig-b g1B*g0A", longint'(pp_b), 15);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
