// tb_rns_mul_n5: end-to-end test of the 12-channel n = 5 RNS multiplier at its only size.
//
// Part 1 drives all 4096 pairs of twit codewords into the eleven twit channels at once
// (random operands on the 2^10 channel) and checks every channel against (A*B) mod m.
// Part 2 takes random integers X, Y below the dynamic range M (about 2^65), converts them to
// residues here (using the redundant twit form for some channels), multiplies them in the
// design and checks that every output residue equals (X*Y mod M) mod m_i.
// It counts the mechanisms of the datapath and fails if one never occurs: a squeezing fold
// with a non-zero value, a carry-out twit correction, a stage-4 twit-0 conversion, an input
// twit set, and a non-canonical (redundant) output codeword.
module tb_rns_mul_n5;
  import twit_ref_pkg::*;

  localparam int NCH = 11;
  localparam int DEL [NCH] = '{15, 13, 9, 3, 1, 3, 5, 7, 9, 11, 15};
  localparam bit PL  [NCH] = '{0, 0, 0, 0, 0, 1, 1, 1, 1, 1, 1};

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [4:0] a_res [NCH], b_res [NCH], p_res [NCH];
  logic       a_tw [NCH], b_tw [NCH], p_tw [NCH];
  logic [9:0] a_p2, b_p2, p_p2;

  rns_mul_n5 dut (
    .a_res(a_res), .a_tw(a_tw), .b_res(b_res), .b_tw(b_tw),
    .a_p2(a_p2), .b_p2(b_p2), .p_res(p_res), .p_tw(p_tw), .p_p2(p_p2)
  );

  // Mechanism counters, sampled on every clock.
  int n_fold [NCH], n_cout [NCH], n_tw0 [NCH];
  int n_in_tw = 0, n_redundant = 0;
  for (genvar i = 0; i < NCH; i++) begin : g_mon
    initial begin n_fold[i] = 0; n_cout[i] = 0; n_tw0[i] = 0; end
    always @(negedge clk) begin
      if (dut.g_ch[i].u_mul.u_fin.cout) n_cout[i]++;
      if (!dut.g_ch[i].u_mul.u_fin.tw_pre) n_tw0[i]++;
    end
    if (PL[i]) begin : g_sq
      always @(negedge clk) if (dut.g_ch[i].u_mul.u_sq.g_step[0].f != '0) n_fold[i]++;
    end
  end

  function automatic longint mval(int i);
    return ref_mod(5, DEL[i], PL[i]);
  endfunction

  task automatic check_all(logic [129:0] expect_x, bit use_x);
    longint ea, eb, got, exp;
    for (int i = 0; i < NCH; i++) begin
      got = ref_decode(longint'(p_res[i]), p_tw[i], 5, DEL[i], PL[i]);
      if (use_x) exp = longint'(expect_x % 130'(mval(i)));
      else begin
        ea = ref_decode(longint'(a_res[i]), a_tw[i], 5, DEL[i], PL[i]);
        eb = ref_decode(longint'(b_res[i]), b_tw[i], 5, DEL[i], PL[i]);
        exp = ref_norm(ea * eb, mval(i));
      end
      checks++;
      if (got != exp) begin
        failures++;
        if (failures < 20) $display("FAIL channel m=%0d got=%0d exp=%0d", mval(i), got, exp);
      end
      if (a_tw[i] || b_tw[i]) n_in_tw++;
      if (p_tw[i] || longint'(p_res[i]) >= mval(i)) n_redundant++;
    end
    checks++;
    exp = use_x ? longint'(expect_x % 130'd1024) : (longint'(a_p2) * longint'(b_p2)) % 1024;
    if (longint'(p_p2) != exp) begin
      failures++;
      $display("FAIL channel 1024 got=%0d exp=%0d", p_p2, exp);
    end
  endtask

  // Residue of x in channel i, in the redundant twit form when 'alt' is set and one exists.
  task automatic encode(int i, logic [129:0] x, bit alt, output logic [4:0] r, output logic t);
    longint v;
    v = longint'(x % 130'(mval(i)));
    r = 5'(v); t = 1'b0;
    if (alt) begin
      if (!PL[i] && v + longint'(DEL[i]) < 32) begin r = 5'(v + longint'(DEL[i])); t = 1'b1; end
      if (PL[i] && v >= longint'(DEL[i])) begin r = 5'(v - longint'(DEL[i])); t = 1'b1; end
    end
    if (PL[i] && v >= 32) begin r = 5'(v - longint'(DEL[i])); t = 1'b1; end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [129:0] bigm, x, y, z;
    int fold_tot, cout_tot, tw0_tot;
    // Part 1: every codeword pair on all twit channels.
    for (int k = 0; k < 4096; k++) begin
      for (int i = 0; i < NCH; i++) begin
        {a_tw[i], a_res[i]} = 6'(k);
        {b_tw[i], b_res[i]} = 6'(k >> 6);
      end
      a_p2 = 10'($urandom); b_p2 = 10'($urandom);
      @(posedge clk);
      check_all('0, 1'b0);
    end
    // Part 2: whole numbers through the RNS.
    bigm = 130'd1024;
    for (int i = 0; i < NCH; i++) bigm = bigm * 130'(mval(i));
    checks++;
    if (bigm != 130'd28620324425937054720) begin
      failures++;
      $display("FAIL dynamic range %0d", bigm);
    end
    for (int k = 0; k < 3000; k++) begin
      x = {34'd0, $urandom, $urandom, $urandom} % bigm;
      y = {34'd0, $urandom, $urandom, $urandom} % bigm;
      if (k == 0) begin x = bigm - 1; y = bigm - 1; end
      z = (x * y) % bigm;
      for (int i = 0; i < NCH; i++) begin
        encode(i, x, 1'(k), a_res[i], a_tw[i]);
        encode(i, y, 1'(k >> 1), b_res[i], b_tw[i]);
      end
      a_p2 = 10'(x); b_p2 = 10'(y);
      @(posedge clk);
      check_all(z, 1'b1);
    end
    @(posedge clk);
    fold_tot = 0; cout_tot = 0; tw0_tot = 0;
    for (int i = 0; i < NCH; i++) begin
      fold_tot += n_fold[i]; cout_tot += n_cout[i]; tw0_tot += n_tw0[i];
    end
    $display("mechanisms: squeeze folds %0d, carry-out corrections %0d, twit-0 conversions %0d, twit inputs %0d, redundant outputs %0d",
             fold_tot, cout_tot, tw0_tot, n_in_tw, n_redundant);
    checks += 5;
    if (fold_tot == 0)    begin failures++; $display("FAIL squeezing never folded"); end
    if (cout_tot == 0)    begin failures++; $display("FAIL no carry-out correction"); end
    if (tw0_tot == 0)     begin failures++; $display("FAIL no twit-0 conversion"); end
    if (n_in_tw == 0)     begin failures++; $display("FAIL no twit input"); end
    if (n_redundant == 0) begin failures++; $display("FAIL no redundant output"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
