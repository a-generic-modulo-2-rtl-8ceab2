// tb_twit_ppg: for every pair of twit codewords of the m = 47 channel (n = 5, 2^5 + 15), and
// for random codewords of an n = 11 channel, the partial products must each be residues and
// must sum to A*B modulo m. The four rows printed in the paper's worked example are checked
// one by one.
module tb_twit_ppg;
  import twit_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [4:0]  a5, b5;
  logic        at5, bt5;
  logic [5:0]  pp5 [4];
  logic [10:0] a11, b11;
  logic        at11, bt11;
  logic [10:0] pp11 [16];

  twit_ppg #(.N(5), .DELTA(15), .PLUS(1)) u5 (.a(a5), .a_tw(at5), .b(b5), .b_tw(bt5), .pp(pp5));
  twit_ppg #(.N(11), .DELTA(1023), .PLUS(0)) u11 (.a(a11), .a_tw(at11), .b(b11), .b_tw(bt11), .pp(pp11));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint sum, m, ea, eb;
    // worked example first
    a5 = 5'b11011; at5 = 1; b5 = 5'b10101; bt5 = 0;
    @(posedge clk);
    checks++;
    if (pp5[0] != 6'b010010 || pp5[1] != 6'b011000 || pp5[2] != 6'b011111 || pp5[3] != 6'b001010) begin
      failures++;
      $display("FAIL worked example rows %b %b %b %b", pp5[0], pp5[1], pp5[2], pp5[3]);
    end
    m = ref_mod(5, 15, 1);
    for (int i = 0; i < 4096; i++) begin
      {at5, a5} = 6'(i); {bt5, b5} = 6'(i >> 6);
      @(posedge clk);
      sum = 0;
      for (int k = 0; k < 4; k++) begin
        sum += pp5[k];
        checks++;
        if (longint'(pp5[k]) >= m) begin failures++; $display("FAIL pp %0d not reduced", k); end
      end
      ea = ref_decode(a5, at5, 5, 15, 1); eb = ref_decode(b5, bt5, 5, 15, 1);
      checks++;
      if (ref_norm(sum, m) != ref_norm(ea * eb, m)) begin
        failures++;
        $display("FAIL n5 A=%0d B=%0d sum=%0d", ea, eb, sum);
      end
    end
    m = ref_mod(11, 1023, 0);
    for (int i = 0; i < 3000; i++) begin
      a11 = 11'($urandom); b11 = 11'($urandom); at11 = 1'($urandom); bt11 = 1'($urandom);
      @(posedge clk);
      sum = 0;
      for (int k = 0; k < 16; k++) sum += pp11[k];
      ea = ref_decode(a11, at11, 11, 1023, 0); eb = ref_decode(b11, bt11, 11, 1023, 0);
      checks++;
      if (ref_norm(sum, m) != ref_norm(ea * eb, m)) begin
        failures++;
        $display("FAIL n11 A=%0d B=%0d", ea, eb);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
