// tb_twit_mod_mul: end-to-end check of single channels with n = 5. Every pair of twit
// codewords (4096 pairs) is multiplied for the default channel 2^5 + 15 = 47 and for
// 2^5 - 15 = 17, and for the six moduli 25, 27, 29, 31, 33, 35 of the paper's timing sweep.
// The two worked examples of the paper are also checked bit for bit.
module tb_twit_mod_mul;
  localparam int NC = 8;
  localparam int DEL [NC] = '{15, 15, 7, 5, 3, 1, 1, 3};
  localparam bit PL  [NC] = '{1, 0, 0, 0, 0, 0, 1, 1};

  int checks = 0, failures = 0;
  logic clk = 0;
  logic start = 0;
  always #5 clk = ~clk;

  int c_chk [NC], c_fail [NC], c_cout [NC], c_tw0 [NC];
  logic c_done [NC];

  for (genvar i = 0; i < NC; i++) begin : g_c
    twit_mul_checker #(.N(5), .DELTA(DEL[i]), .PLUS(PL[i])) u_c (
      .clk(clk), .start(start), .checks(c_chk[i]), .failures(c_fail[i]),
      .couts(c_cout[i]), .tw0(c_tw0[i]), .done(c_done[i])
    );
  end

  // Direct instance of the default configuration for the paper's worked example.
  logic [4:0] a, b, p;
  logic at, bt, pt;
  twit_mod_mul dut (.a(a), .a_tw(at), .b(b), .b_tw(bt), .p(p), .p_tw(pt));
  logic [4:0] pm;
  logic ptm;
  twit_mod_mul #(.N(5), .DELTA(15), .PLUS(0)) dut17 (.a(a), .a_tw(at), .b(b), .b_tw(bt), .p(pm), .p_tw(ptm));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int done_all;
    a = 5'b11011; at = 1; b = 5'b10101; bt = 0;
    @(posedge clk);
    checks++;
    if (p != 5'b10101 || pt != 1'b1) begin failures++; $display("FAIL worked example m=47: %b/%b", p, pt); end
    checks++;
    if (pm != 5'b11101 || ptm != 1'b1) begin failures++; $display("FAIL worked example m=17: %b/%b", pm, ptm); end
    start = 1;
    do begin
      @(posedge clk);
      done_all = 1;
      for (int i = 0; i < NC; i++) if (!c_done[i]) done_all = 0;
    end while (!done_all);
    for (int i = 0; i < NC; i++) begin
      checks += c_chk[i];
      failures += c_fail[i];
      $display("m=%0d: %0d products, %0d carry-out corrections, %0d twit-0 conversions",
               PL[i] ? 32 + DEL[i] : 32 - DEL[i], c_chk[i], c_cout[i], c_tw0[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
