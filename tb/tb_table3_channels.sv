// tb_table3_channels: the larger channels of the paper's n = 8 and n = 11 evaluation,
// delta = +-3, +-9 and +-(2^(n-1)-1), i.e. moduli 253, 259, 247, 265, 129, 383 and
// 2045, 2051, 2039, 2057, 1025, 3071. Each channel multiplies 20000 random pairs of twit
// codewords (plus the all-ones corner) and is compared with (A*B) mod m.
module tb_table3_channels;
  localparam int NC = 12;
  localparam int NN  [NC] = '{8, 8, 8, 8, 8, 8, 11, 11, 11, 11, 11, 11};
  localparam int DEL [NC] = '{3, 3, 9, 9, 127, 127, 3, 3, 9, 9, 1023, 1023};
  localparam bit PL  [NC] = '{0, 1, 0, 1, 0, 1, 0, 1, 0, 1, 0, 1};

  int checks = 0, failures = 0;
  logic clk = 0;
  logic start = 0;
  always #5 clk = ~clk;

  int c_chk [NC], c_fail [NC], c_cout [NC], c_tw0 [NC];
  logic c_done [NC];

  for (genvar i = 0; i < NC; i++) begin : g_c
    twit_mul_checker #(.N(NN[i]), .DELTA(DEL[i]), .PLUS(PL[i])) u_c (
      .clk(clk), .start(start), .checks(c_chk[i]), .failures(c_fail[i]),
      .couts(c_cout[i]), .tw0(c_tw0[i]), .done(c_done[i])
    );
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int done_all;
    @(posedge clk);
    start = 1;
    do begin
      @(posedge clk);
      done_all = 1;
      for (int i = 0; i < NC; i++) if (!c_done[i]) done_all = 0;
    end while (!done_all);
    for (int i = 0; i < NC; i++) begin
      checks += c_chk[i];
      failures += c_fail[i];
      $display("n=%0d m=%0d: %0d products, %0d carry-out corrections", NN[i],
               PL[i] ? (1 << NN[i]) + DEL[i] : (1 << NN[i]) - DEL[i], c_chk[i], c_cout[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
