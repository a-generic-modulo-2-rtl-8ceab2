// tb_twit_squeeze: squeezing must keep the pair's value modulo m and bring it to n+1 bits.
// Checked on the n = 5, 2^5 + 15 channel (one step; the paper's example 43/40 -> 18/18),
// on n = 8, 2^8 + 3 (12-bit pair, two steps) and on n = 5, 2^5 - 9 (no step: pass-through).
module tb_twit_squeeze;
  import twit_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [6:0]  s5, c5;
  logic [5:0]  so5, co5;
  logic [11:0] s8, c8;
  logic [8:0]  so8, co8;
  logic [5:0]  sm, cm;
  logic [5:0]  som, com;

  twit_squeeze #(.N(5), .DELTA(15), .PLUS(1), .W0(7))  u5 (.s(s5), .c(c5), .so(so5), .co(co5));
  twit_squeeze #(.N(8), .DELTA(3),  .PLUS(1), .W0(12)) u8 (.s(s8), .c(c8), .so(so8), .co(co8));
  twit_squeeze #(.N(5), .DELTA(9),  .PLUS(0), .W0(6))  um (.s(sm), .c(cm), .so(som), .co(com));

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
    s5 = 7'd43; c5 = 7'd40; s8 = '0; c8 = '0; sm = '0; cm = '0;
    @(posedge clk);
    chk("fig-a so", so5, 18); chk("fig-a co", co5, 18);
    for (int i = 0; i < 5000; i++) begin
      s5 = 7'($urandom); c5 = 7'($urandom);
      s8 = 12'($urandom); c8 = 12'($urandom);
      sm = 6'($urandom); cm = 6'($urandom);
      if (i == 0) begin s5 = '1; c5 = '1; s8 = '1; c8 = '1; end
      @(posedge clk);
      chk("47",  ref_norm(longint'(so5) + co5, 47),  ref_norm(longint'(s5) + c5, 47));
      chk("259", ref_norm(longint'(so8) + co8, 259), ref_norm(longint'(s8) + c8, 259));
      chk("23 s", som, sm);
      chk("23 c", com, cm);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
