// twit_pp_lut: one modular partial-product generator of the twit multiplier (stage 2).
//
// Each operand of a channel is cut into 3-bit groups. Group 0 is {twit, x1, x0} and stands
// for x1x0 + twit*(+-delta); group g >= 1 is x[3g+1:3g-1] with positional weight 2^(3g-1).
// This block forms |(value of A group GA) * (value of B group GB)|_m directly, weights
// included, so the result is already a residue in [0, m-1]. With six inputs the whole job is a
// single 64-entry truth table; the table is computed at elaboration from the channel
// parameters, so the block is a fixed 6-input Boolean function with no arithmetic at run time.
//
// Interface: ga/gb carry the groups right-aligned (absent top bits of an incomplete group are
// ignored); pp is n bits wide for 2^n-delta and n+1 bits wide for 2^n+delta.
// Timing: purely combinational.
//
// The group layout, the single 6-input function and the output widths follow the paper;
// building the function as an elaboration-time table is this design's choice.
module twit_pp_lut #(
  parameter int unsigned N     = 5,
  parameter int unsigned DELTA = 15,
  parameter bit          PLUS  = 1'b1,
  parameter int unsigned GA    = 0,
  parameter int unsigned GB    = 0,
  localparam int unsigned PPW  = twit_pkg::pp_width(N, PLUS)
) (
  input  logic [2:0]     ga,
  input  logic [2:0]     gb,
  output logic [PPW-1:0] pp
);

  localparam longint M = twit_pkg::modulus(N, DELTA, PLUS);

  // Integer value of a 3-bit group of index g (twit included for group 0).
  function automatic longint group_val(int unsigned g, logic [2:0] bits);
    longint v;
    if (g == 0) begin
      v = longint'(bits[1:0]);
      if (bits[2]) v = v + twit_pkg::twit_value(DELTA, PLUS);
    end else begin
      v = (longint'(bits) % (longint'(1) << twit_pkg::group_bits(N, g))) << twit_pkg::group_lsb(g);
    end
    return v;
  endfunction

  function automatic logic [64*PPW-1:0] build_lut();
    logic [64*PPW-1:0] t;
    longint r;
    t = '0;
    for (int i = 0; i < 64; i++) begin
      r = twit_pkg::mod_pos(group_val(GA, 3'(i)) * group_val(GB, 3'(i >> 3)), M);
      t[i*PPW +: PPW] = PPW'(r);
    end
    return t;
  endfunction

  localparam logic [64*PPW-1:0] LUT = build_lut();

  logic [5:0] idx;
  assign idx = {gb, ga};
  assign pp  = LUT[idx*PPW +: PPW];

endmodule
