// tb_pow2_mod_mul: the 2^10 channel must return (a*b) mod 1024 for random and corner operands.
module tb_pow2_mod_mul;
  localparam int W = 10;
  logic [W-1:0] a, b, p;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  pow2_mod_mul dut (.a(a), .b(b), .p(p));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 5000; i++) begin
      a = W'($urandom); b = W'($urandom);
      if (i == 0) begin a = '1; b = '1; end
      @(posedge clk);
      checks++;
      if (int'(p) != (int'(a) * int'(b)) % 1024) begin
        failures++;
        $display("FAIL a=%0d b=%0d p=%0d", a, b, p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
