// tb_twit_final_add: the n-bit word plus twit produced by stage 4 must decode to the value of
// the carry-save pair modulo m, over all 6-bit pairs of four channels (2^5 +- 15, 2^5 +- 1)
// and over random 9-bit pairs of n = 8 channels. The two results of the paper's worked
// example are checked bit for bit: 18/18 -> 10101 twit 1 (m = 47) and 7/24 -> 11101 twit 1
// (m = 17). It also counts both outcomes of the carry-out twit correction.
module tb_twit_final_add;
  import twit_ref_pkg::*;

  int checks = 0, failures = 0, couts = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [5:0] s, c;
  logic [4:0] p47, p17, p33, p31;
  logic       t47, t17, t33, t31;
  logic [8:0] s8, c8;
  logic [7:0] p383, p129;
  logic       t383, t129;

  twit_final_add #(.N(5), .DELTA(15), .PLUS(1), .W(6)) u47 (.s(s), .c(c), .p(p47), .p_tw(t47));
  twit_final_add #(.N(5), .DELTA(15), .PLUS(0), .W(6)) u17 (.s(s), .c(c), .p(p17), .p_tw(t17));
  twit_final_add #(.N(5), .DELTA(1),  .PLUS(1), .W(6)) u33 (.s(s), .c(c), .p(p33), .p_tw(t33));
  twit_final_add #(.N(5), .DELTA(1),  .PLUS(0), .W(6)) u31 (.s(s), .c(c), .p(p31), .p_tw(t31));
  twit_final_add #(.N(8), .DELTA(127), .PLUS(1), .W(9)) u383 (.s(s8), .c(c8), .p(p383), .p_tw(t383));
  twit_final_add #(.N(8), .DELTA(127), .PLUS(0), .W(9)) u129 (.s(s8), .c(c8), .p(p129), .p_tw(t129));

  task automatic chk(string name, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s s=%0d c=%0d got=%0d exp=%0d", name, s, c, got, exp);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    s8 = '0; c8 = '0;
    s = 6'd18; c = 6'd18;
    @(posedge clk);
    chk("fig-a p", p47, 5'b10101); chk("fig-a tw", t47, 1);
    s = 6'd7; c = 6'd24;
    @(posedge clk);
    chk("fig-b p", p17, 5'b11101); chk("fig-b tw", t17, 1);
    for (int i = 0; i < 4096; i++) begin
      s = 6'(i); c = 6'(i >> 6);
      @(posedge clk);
      chk("47", ref_decode(p47, t47, 5, 15, 1), ref_norm(longint'(s) + c, 47));
      chk("17", ref_decode(p17, t17, 5, 15, 0), ref_norm(longint'(s) + c, 17));
      chk("33", ref_decode(p33, t33, 5, 1, 1),  ref_norm(longint'(s) + c, 33));
      chk("31", ref_decode(p31, t31, 5, 1, 0),  ref_norm(longint'(s) + c, 31));
      if (u47.cout || u17.cout) couts++;
    end
    for (int i = 0; i < 5000; i++) begin
      s8 = 9'($urandom); c8 = 9'($urandom);
      @(posedge clk);
      chk("383", ref_decode(p383, t383, 8, 127, 1), ref_norm(longint'(s8) + c8, 383));
      chk("129", ref_decode(p129, t129, 8, 127, 0), ref_norm(longint'(s8) + c8, 129));
    end
    checks++;
    if (couts == 0) begin failures++; $display("FAIL carry-out correction never exercised"); end
    $display("carry-out corrections: %0d", couts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
