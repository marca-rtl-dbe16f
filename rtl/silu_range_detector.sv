// silu_range_detector: range detector and constant output of the RPE's SiLU path.
//
// SiLU(x) = x / (1 + e^-x) is replaced by four segments:
//   x < -5          : -0.0135                       (constant output, no arithmetic)
//   -5 <= x < -1.5  : -0.06244 x - 0.3457           (one multiply-add pass)
//   -1.5 <= x <= 0.75: 0.232 (x + 1.181)^2 - 0.275  (two multiply-add passes, Horner form)
//   x > 0.75        : 1.05 x - 0.2781               (one multiply-add pass)
// The breakpoints and coefficients are the accelerator's. This unit compares the float input
// with the breakpoints and hands the RPE the segment number, the constant output and the
// multiplier/adder coefficients of the first pass; the Horner rewriting of the quadratic is this
// design's way of fitting it to one multiplier and one adder.
//
// Interface: combinational. seg = 0..3 as listed above.
module silu_range_detector
  import marca_pkg::*;
(
  input  fp32_t       x,
  output logic [1:0]  seg,
  output fp32_t       mul_k,       // first-pass multiplier coefficient
  output fp32_t       add_k,       // first-pass addend
  output fp32_t       const_out    // value of the constant segment
);

  // Signed-magnitude float compare: returns 1 when a < b.
  function automatic logic fp_lt(fp32_t p, fp32_t q);
    if (p[31] != q[31]) return p[31] && ((p[30:0] | q[30:0]) != 31'd0);
    if (p[31])          return p[30:0] > q[30:0];
    return p[30:0] < q[30:0];
  endfunction

  always_comb begin
    const_out = SILU_CONST;
    if (fp_lt(x, SILU_X0)) begin
      seg = 2'd0; mul_k = FP_ZERO;   add_k = SILU_CONST;
    end else if (fp_lt(x, SILU_X1)) begin
      seg = 2'd1; mul_k = SILU_L1_K; add_k = SILU_L1_B;
    end else if (!fp_lt(SILU_X2, x)) begin
      seg = 2'd2; mul_k = SILU_Q_A;  add_k = SILU_Q_B;
    end else begin
      seg = 2'd3; mul_k = SILU_L2_K; add_k = SILU_L2_B;
    end
  end

endmodule
