// tb_csa_tree: the carry-save pair must add up to the sum of the operands, for the 4-operand
// tree of the n = 5 channels (including the two pairs printed in the paper's worked example)
// and for the 9- and 16-operand trees of n = 8 and n = 11 channels.
module tb_csa_tree;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [5:0]  o4 [4];
  logic [6:0]  s4, c4;          // expected width n+2 = 7 for 2^5 + delta
  logic [4:0]  m4 [4];
  logic [5:0]  sm4, cm4;        // expected width n+1 = 6 for 2^5 - delta
  logic [8:0]  o9 [9];
  logic [11:0] s9, c9;
  logic [10:0] o16 [16];
  logic [14:0] s16, c16;

  csa_tree #(.NUM(4),  .WI(6))  u4  (.ops(o4),  .s(s4),  .c(c4));
  csa_tree #(.NUM(4),  .WI(5))  um4 (.ops(m4),  .s(sm4), .c(cm4));
  csa_tree #(.NUM(9),  .WI(9))  u9  (.ops(o9),  .s(s9),  .c(c9));
  csa_tree #(.NUM(16), .WI(11)) u16 (.ops(o16), .s(s16), .c(c16));

  task automatic chk(string name, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d", name, got, exp);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t;
    // worked example (a): rows 18, 24, 31, 10 -> 0101011 and 0101000
    o4 = '{6'd18, 6'd24, 6'd31, 6'd10};
    // worked example (b): rows 5, 7, 15, 4 -> 000111 and 011000
    m4 = '{5'd5, 5'd7, 5'd15, 5'd4};
    @(posedge clk);
    chk("fig-a s", s4, 43); chk("fig-a c", c4, 40);
    chk("fig-b s", sm4, 7); chk("fig-b c", cm4, 24);
    for (int i = 0; i < 3000; i++) begin
      foreach (o4[k]) o4[k] = 6'($urandom % 47);
      foreach (m4[k]) m4[k] = 5'($urandom);
      foreach (o9[k]) o9[k] = 9'($urandom);
      foreach (o16[k]) o16[k] = 11'($urandom);
      if (i == 1) begin
        foreach (o4[k]) o4[k] = 6'd46;
        foreach (m4[k]) m4[k] = '1;
        foreach (o9[k]) o9[k] = '1;
        foreach (o16[k]) o16[k] = '1;
      end
      @(posedge clk);
      t = 0; foreach (o4[k]) t += o4[k];   chk("4", longint'(s4) + longint'(c4), t);
      t = 0; foreach (m4[k]) t += m4[k];   chk("m4", longint'(sm4) + longint'(cm4), t);
      t = 0; foreach (o9[k]) t += o9[k];   chk("9", longint'(s9) + longint'(c9), t);
      t = 0; foreach (o16[k]) t += o16[k]; chk("16", longint'(s16) + longint'(c16), t);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
