// twit_mul_checker: testbench helper that owns one twit_mod_mul channel and checks it.
// After 'start' it applies either every pair of twit codewords (when 2^(2n+2) <= MAX_EXH)
// or NRAND random pairs, one per clock, and compares the decoded product with
// (A*B) mod m computed here. It reports its check and failure counts and raises 'done'.
// It also counts how often the stage-4 carry-out corrected the twit and how often the
// stage-4 table emitted twit 0, so the caller can see that both paths were taken.
module twit_mul_checker #(
  parameter int N       = 5,
  parameter int DELTA   = 15,
  parameter bit PLUS    = 1'b1,
  parameter int NRAND   = 20000,
  parameter int MAX_EXH = 1 << 14
) (
  input  logic clk,
  input  logic start,
  output int   checks,
  output int   failures,
  output int   couts,
  output int   tw0,
  output logic done
);
  import twit_ref_pkg::*;

  logic [N-1:0] a, b, p;
  logic         at, bt, pt;

  twit_mod_mul #(.N(N), .DELTA(DELTA), .PLUS(PLUS)) dut (
    .a(a), .a_tw(at), .b(b), .b_tw(bt), .p(p), .p_tw(pt)
  );

  localparam longint M = ref_mod(N, DELTA, PLUS);
  localparam bit EXH = ((longint'(1) << (2 * N + 2)) <= MAX_EXH);

  initial begin
    longint total, ea, eb;
    checks = 0; failures = 0; couts = 0; tw0 = 0; done = 1'b0;
    a = '0; b = '0; at = 1'b0; bt = 1'b0;
    wait (start);
    total = EXH ? (longint'(1) << (2 * N + 2)) : longint'(NRAND);
    for (longint i = 0; i < total; i++) begin
      if (EXH) begin
        {at, a} = (N+1)'(i);
        {bt, b} = (N+1)'(i >> (N + 1));
      end else begin
        a = N'({$urandom, $urandom}); b = N'({$urandom, $urandom});
        at = 1'($urandom); bt = 1'($urandom);
        if (i == 0) begin a = '1; b = '1; at = 1'b1; bt = 1'b1; end
      end
      @(posedge clk);
      ea = ref_decode(a, at, N, DELTA, PLUS);
      eb = ref_decode(b, bt, N, DELTA, PLUS);
      checks++;
      if (ref_decode(p, pt, N, DELTA, PLUS) != ref_norm(ea * eb, M)) begin
        failures++;
        if (failures < 10)
          $display("FAIL m=%0d A=%0d(%b,%b) B=%0d(%b,%b) got %b/%b", M, ea, a, at, eb, b, bt, p, pt);
      end
      if (dut.u_fin.cout) couts++;
      if (!dut.u_fin.tw_pre) tw0++;
    end
    done = 1'b1;
  end
endmodule
