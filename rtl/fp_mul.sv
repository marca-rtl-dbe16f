// fp_mul: combinational IEEE-754 single-precision multiplier, the multiplier of the RPE's
// normal path.
//
// The 24x24-bit significand product is normalised by at most one position and rounded to
// nearest, ties to even. Subnormal inputs and results are flushed to zero; an infinite or NaN
// input, or an overflowing result, gives a signed infinity. The accelerator names a
// floating-point multiplier in every RPE; the format details (rounding, flushing) are this
// design's own choice.
//
// Interface: y = a * b, purely combinational.
module fp_mul
  import marca_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  logic        sign;
  logic [7:0]  ea, eb;
  logic [47:0] prod;
  logic signed [10:0] exp_s;
  logic [22:0] mant;
  logic        guard, sticky, rnd;
  logic [23:0] mant_r;

  always_comb begin
    sign  = a[31] ^ b[31];
    ea    = a[30:23];
    eb    = b[30:23];
    prod  = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    exp_s = $signed({3'b000, ea}) + $signed({3'b000, eb}) - 11'sd127;
    if (prod[47]) begin
      mant   = prod[46:24];
      guard  = prod[23];
      sticky = |prod[22:0];
      exp_s  = exp_s + 11'sd1;
    end else begin
      mant   = prod[45:23];
      guard  = prod[22];
      sticky = |prod[21:0];
    end
    rnd    = guard & (sticky | mant[0]);
    mant_r = {1'b0, mant} + {23'd0, rnd};
    if (mant_r[23]) exp_s = exp_s + 11'sd1;   // mantissa rounded up to 2.0: value is 1.0 * 2^(e+1)

    if (ea == 8'd0 || eb == 8'd0) begin
      y = {sign, 31'd0};
    end else if (ea == 8'hFF || eb == 8'hFF || exp_s >= 11'sd255) begin
      y = {sign, 8'hFF, 23'd0};
    end else if (exp_s <= 11'sd0) begin
      y = {sign, 31'd0};
    end else begin
      y = {sign, exp_s[7:0], mant_r[22:0]};
    end
  end

endmodule
