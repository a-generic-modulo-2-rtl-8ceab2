// tb_twit_fold_lut: exhaustive check of the overflow-folding tables: f must equal
// |2^POS (hs + hc)|_m. Includes the fold printed in the paper's worked example
// (bits 6..4 = 010 and 010 of the m = 47 pair fold to 010001 = 17).
module tb_twit_fold_lut;
  import twit_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [2:0] hs, hc;
  logic [5:0] f47;
  logic [5:0] f29;
  logic [8:0] f247;

  twit_fold_lut #(.N(5), .DELTA(15), .PLUS(1), .WH(3), .POS(4)) u47  (.hs(hs), .hc(hc), .f(f47));
  twit_fold_lut #(.N(5), .DELTA(3),  .PLUS(0), .WH(3), .POS(4)) u29  (.hs(hs), .hc(hc), .f(f29));
  twit_fold_lut #(.N(8), .DELTA(9),  .PLUS(0), .WH(3), .POS(9)) u247 (.hs(hs), .hc(hc), .f(f247));

  task automatic chk(string name, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s hs=%b hc=%b got=%0d exp=%0d", name, hs, hc, got, exp);
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
      hs = 3'(i); hc = 3'(i >> 3);
      @(posedge clk);
      chk("47",  f47,  ref_norm((longint'(hs) + hc) * 16, 47));
      chk("29",  f29,  ref_norm((longint'(hs) + hc) * 16, 29));
      chk("247", f247, ref_norm((longint'(hs) + hc) * 512, 247));
    end
    hs = 3'b010; hc = 3'b010;
    @(posedge clk);
    chk("worked example", f47, 17);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
