// fp32_mul: IEEE-754 single-precision multiplier, the multiply half of the
// floating-point DSP slice that every PE lane maps onto.
//
// Combinational: y = a * b, rounded to nearest, ties to even. The 24x24-bit
// significand product is normalised by at most one place, then rounded with
// a guard bit and a sticky bit. Subnormal operands are read as zero and
// subnormal results are flushed to a signed zero (as hard FP DSP blocks do);
// any NaN result is the canonical quiet NaN 0x7FC00000. The paper states
// only that all data is FP32 on hard DSPs; rounding and the subnormal
// policy are this design's choices.
module fp32_mul
  import mlp_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic [22:0] fa, fb;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic [47:0] prod;
  logic signed [10:0] exp_pre, exp_fin;
  logic [23:0] mant;        // with hidden bit
  logic        guard, sticky, round_up;
  logic [24:0] mant_rnd;

  always_comb begin
    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    sy     = sa ^ sb;
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hFF) && (fa == '0);
    b_inf  = (eb == 8'hFF) && (fb == '0);
    a_nan  = (ea == 8'hFF) && (fa != '0);
    b_nan  = (eb == 8'hFF) && (fb != '0);

    prod    = {1'b1, fa} * {1'b1, fb};
    exp_pre = $signed({3'b000, ea}) + $signed({3'b000, eb}) - 11'sd127;
    if (prod[47]) begin
      mant    = prod[47:24];
      guard   = prod[23];
      sticky  = |prod[22:0];
      exp_pre = exp_pre + 11'sd1;
    end else begin
      mant    = prod[46:23];
      guard   = prod[22];
      sticky  = |prod[21:0];
    end
    round_up = guard & (sticky | mant[0]);
    mant_rnd = {1'b0, mant} + {24'd0, round_up};
    exp_fin  = exp_pre;
    if (mant_rnd[24]) begin
      exp_fin  = exp_pre + 11'sd1;
      mant_rnd = mant_rnd >> 1;
    end

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) begin
      y = FP32_QNAN;
    end else if (a_inf || b_inf) begin
      y = {sy, 8'hFF, 23'd0};
    end else if (a_zero || b_zero) begin
      y = {sy, 31'd0};
    end else if (exp_fin >= 11'sd255) begin
      y = {sy, 8'hFF, 23'd0};
    end else if (exp_fin <= 11'sd0) begin
      y = {sy, 31'd0};
    end else begin
      y = {sy, exp_fin[7:0], mant_rnd[22:0]};
    end
  end

endmodule
