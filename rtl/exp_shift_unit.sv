// exp_shift_unit: the logic and shift steps of the fast biased exponential.
//
// The fast exponential computes x' = a*x + b in floating point and then needs the bit pattern of
// the unsigned integer (uint)(x' * 2^23), which, read back as a float, approximates e^x. This
// unit produces that integer without a float-to-integer converter: it keeps the 8 exponent bits
// of x' as the shift length, turns the word into the real significand by masking the mantissa
// (AND 0x007F_FFFF) and setting the hidden one (bit 23), and shifts the significand by the
// unbiased exponent, left when positive and right when negative. The bias c is added afterwards
// by the RPE's adder.
//
// The steps (mask, hidden one, shift by the exponent) follow the accelerator's exponential shift
// unit. Its figure prints "OR 0x00FF_FFFF" but the result it shows has only the hidden bit 23 set,
// which is what is built here. The figure's example shifts by 2 for exponent bits 00000010; the
// shift needed by (uint)(x'*2^23) is the unbiased exponent E-127, which is used here.
// As in the figure, the sign bit is cleared by the mask and plays no part (x' = a*x + b is
// positive over the input range of interest). Saturating a too-large x' to 0xFFFF_FFFF is this
// design's choice.
//
// Interface: combinational, y = bits of (uint)(x * 2^23).
module exp_shift_unit
  import marca_pkg::*;
(
  input  fp32_t       x,
  output logic [31:0] y
);

  logic [7:0]  exp_bits;    // the "register" holding the shift length
  logic [31:0] signif;      // mantissa with the hidden one: (x & 0x007F_FFFF) | 0x0080_0000
  logic signed [9:0] sh;

  always_comb begin
    exp_bits = x[30:23];
    signif   = (x & 32'h007F_FFFF) | 32'h0080_0000;
    sh       = $signed({2'b00, exp_bits}) - 10'sd127;
    if (exp_bits == 8'd0) begin
      y = 32'd0;                                   // zero x' casts to 0
    end else if (sh > 10'sd8) begin
      y = 32'hFFFF_FFFF;                           // does not fit in 32 bits
    end else if (sh >= 10'sd0) begin
      y = signif << sh[3:0];
    end else if (sh > -10'sd24) begin
      y = signif >> (5'(-sh));
    end else begin
      y = 32'd0;
    end
  end

endmodule
