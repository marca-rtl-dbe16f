// fp_add: combinational IEEE-754 single-precision adder, used by the RPE's normal path, the
// reduction tree and the normalization unit.
//
// The operand of larger magnitude is kept, the other is aligned with guard, round and sticky
// bits, the significands are added or subtracted, the result is renormalised with a leading-zero
// count and rounded to nearest, ties to even. Subnormals are flushed to zero and an exact zero
// result is +0; infinities propagate, NaNs are not distinguished. The accelerator names a
// floating-point adder in every RPE and adders in the reduction tree; these format details are
// this design's own choice.
//
// Interface: y = a + b, purely combinational.
module fp_add
  import marca_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  fp32_t       hi, lo;
  logic [7:0]  eb_big, eb_small, d;
  logic [26:0] mb, ms, ms_sh;       // {hidden, 23 mantissa bits, guard, round, sticky}
  logic [27:0] sum;
  logic [4:0]  lz;
  logic signed [9:0] e_res;
  logic [22:0] mant;
  logic        g, rs, rnd;
  logic [23:0] mant_r;
  logic        a_zero, b_zero;

  always_comb begin
    a_zero = (a[30:23] == 8'd0);
    b_zero = (b[30:23] == 8'd0);
    if (a[30:0] >= b[30:0]) begin
      hi = a; lo = b;
    end else begin
      hi = b; lo = a;
    end
    eb_big   = hi[30:23];
    eb_small = lo[30:23];
    mb = {1'b1, hi[22:0], 3'b000};
    ms = (eb_small == 8'd0) ? 27'd0 : {1'b1, lo[22:0], 3'b000};
    d  = eb_big - eb_small;
    if (d >= 8'd27) begin
      ms_sh = {26'd0, |ms};
    end else begin
      ms_sh = ms >> d;
      ms_sh[0] = ms_sh[0] | (|(ms & ~(27'h7FF_FFFF << d)));
    end
    if (hi[31] == lo[31]) sum = {1'b0, mb} + {1'b0, ms_sh};
    else                      sum = {1'b0, mb} - {1'b0, ms_sh};

    e_res = $signed({2'b00, eb_big});
    lz    = 5'd0;
    if (sum[27]) begin
      sum   = {1'b0, sum[27:2], sum[1] | sum[0]};
      e_res = e_res + 10'sd1;
    end else begin
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) begin
          lz = 5'(26 - i);
          break;
        end
      end
      sum   = sum << lz;
      e_res = e_res - $signed({5'd0, lz});
    end
    mant   = sum[25:3];
    g      = sum[2];
    rs     = sum[1] | sum[0];
    rnd    = g & (rs | mant[0]);
    mant_r = {1'b0, mant} + {23'd0, rnd};
    if (mant_r[23]) e_res = e_res + 10'sd1;

    if (a_zero && b_zero) begin
      y = {a[31] & b[31], 31'd0};
    end else if (b_zero) begin
      y = a;
    end else if (a_zero) begin
      y = b;
    end else if (eb_big == 8'hFF) begin
      y = hi;
    end else if (sum == 28'd0 || e_res <= 10'sd0) begin
      y = FP_ZERO;
    end else if (e_res >= 10'sd255) begin
      y = {hi[31], 8'hFF, 23'd0};
    end else begin
      y = {hi[31], e_res[7:0], mant_r[22:0]};
    end
  end

endmodule
