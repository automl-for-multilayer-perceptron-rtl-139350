// fp32_add: IEEE-754 single-precision adder, the add half of the
// floating-point DSP slice. It sums the PE dot-product tree, updates the
// accumulators and adds the bias.
//
// Combinational: y = a + b, rounded to nearest, ties to even. The operand of
// larger magnitude is kept, the other is aligned to it with guard, round and
// sticky bits, the significands are added or subtracted, the result is
// renormalised (one place right or up to 26 places left) and rounded.
// Subnormals are read as zero and flushed to a signed zero; x + (-x) gives
// +0; NaN inputs or inf - inf give the canonical quiet NaN 0x7FC00000.
// The paper fixes only the FP32 format; the rest is this design's choice.
module fp32_add
  import mlp_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  logic        sa, sb, sl, ss;
  logic [7:0]  ea, eb, el, es;
  logic [22:0] fa, fb;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic [23:0] ml, ms;
  logic [7:0]  d;
  logic [26:0] bg, alg;       // significand . G R S
  logic [27:0] sum;
  logic [26:0] norm;
  logic [4:0]  lz;
  logic signed [10:0] exp_n, exp_f;
  logic        round_up;
  logic [24:0] mant_rnd;
  logic        swap;
  logic [26:0] t27;

  always_comb begin
    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hFF) && (fa == '0);
    b_inf  = (eb == 8'hFF) && (fb == '0);
    a_nan  = (ea == 8'hFF) && (fa != '0);
    b_nan  = (eb == 8'hFF) && (fb != '0);

    // larger magnitude first
    swap = {eb, fb} > {ea, fa};
    sl = swap ? sb : sa;
    el = swap ? eb : ea;
    ml = swap ? {~b_zero, fb} : {~a_zero, fa};
    ss = swap ? sa : sb;
    es = swap ? ea : eb;
    ms = swap ? {~a_zero, fa} : {~b_zero, fb};
    if (swap ? a_zero : b_zero) ms = '0;

    d     = el - es;
    bg   = {ml, 3'b000};
    alg = {ms, 3'b000};
    if (d >= 8'd27) begin
      alg = {26'd0, |ms};
    end else if (d != 8'd0) begin
      alg = ({ms, 3'b000} >> d) | {26'd0, |(({ms, 3'b000}) & ((27'd1 << d) - 27'd1))};
    end

    if (sl == ss) sum = {1'b0, bg} + {1'b0, alg};
    else          sum = {1'b0, bg} - {1'b0, alg};

    // normalise so that the hidden bit sits at norm[26]
    lz = '0;
    t27 = '0;
    if (sum[27]) begin
      norm  = sum[27:1] | {26'd0, sum[0]};
      exp_n = $signed({3'b000, el}) + 11'sd1;
    end else begin
      // leading-zero count by a logarithmic search over sum[26:0]
      t27 = sum[26:0];
      if (t27[26:11] == '0) begin lz[4] = 1'b1; t27 = t27 << 16; end
      if (t27[26:19] == '0) begin lz[3] = 1'b1; t27 = t27 << 8;  end
      if (t27[26:23] == '0) begin lz[2] = 1'b1; t27 = t27 << 4;  end
      if (t27[26:25] == '0) begin lz[1] = 1'b1; t27 = t27 << 2;  end
      if (t27[26]    == 1'b0) begin lz[0] = 1'b1; t27 = t27 << 1; end
      norm  = t27;
      exp_n = $signed({3'b000, el}) - $signed({6'd0, lz});
    end

    round_up = norm[2] & (norm[1] | norm[0] | norm[3]);
    mant_rnd = {1'b0, norm[26:3]} + {24'd0, round_up};
    exp_f    = exp_n;
    if (mant_rnd[24]) begin
      exp_f    = exp_n + 11'sd1;
      mant_rnd = mant_rnd >> 1;
    end

    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) begin
      y = FP32_QNAN;
    end else if (a_inf) begin
      y = {sa, 8'hFF, 23'd0};
    end else if (b_inf) begin
      y = {sb, 8'hFF, 23'd0};
    end else if (a_zero && b_zero) begin
      y = {sa & sb, 31'd0};
    end else if (sum == '0) begin
      y = 32'd0;
    end else if (exp_f >= 11'sd255) begin
      y = {sl, 8'hFF, 23'd0};
    end else if (exp_f <= 11'sd0) begin
      y = {sl, 31'd0};
    end else begin
      y = {sl, exp_f[7:0], mant_rnd[22:0]};
    end
  end

endmodule
