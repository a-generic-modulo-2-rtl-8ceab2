// tb_csa32: random and corner checks of the 3:2 counter row: s + c must equal x + y + z,
// and s must be the bitwise sum of the three inputs.
module tb_csa32;
  localparam int W = 12;
  logic [W-1:0] x, y, z, s;
  logic [W:0]   c;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  csa32 #(.W(W)) dut (.x(x), .y(y), .z(z), .s(s), .c(c));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      x = W'($urandom); y = W'($urandom); z = W'($urandom);
      if (i == 0) begin x = '1; y = '1; z = '1; end
      if (i == 1) begin x = '0; y = '0; z = '0; end
      @(posedge clk);
      checks++;
      if ((W+2)'(s) + (W+2)'(c) != (W+2)'(x) + (W+2)'(y) + (W+2)'(z) || c[0] != 1'b0 || s != (x ^ y ^ z)) begin
        failures++;
        $display("FAIL x=%h y=%h z=%h s=%h c=%h", x, y, z, s, c);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
