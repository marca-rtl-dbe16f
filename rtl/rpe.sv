// rpe: reconfigurable processing element.
//
// One floating-point multiplier feeds one floating-point adder (the normal path); an opcode
// detector chooses the operands of each, the EXP shift unit and the SiLU range detector with its
// constant output sit beside them, and an output multiplexer picks the result. Every operation
// is one or two passes through multiply-then-add:
//   RPE_MUL  : a*b + 0                                  one pass
//   RPE_ADD  : a*1 + b                                  one pass
//   RPE_EXP  : s = a*c0 + c1 ; shift(s) * 1 + c2        two passes, the shift unit between them
//   RPE_SILU : segment 0: constant output (result replaced)
//              segment 1/3: a*k + d
//              segment 2: t = a*0.232 + 0.547984 ; t*a + 0.0485846
// which gives the 0, 2 or 4 element-wise operations per SiLU input and the four cycles of an
// exponential that the accelerator describes. Every SiLU input takes two passes (the second an
// exact identity, *1 + 0, outside segment 2) so that all RPEs of an RCU, whatever segment their
// inputs fall in, deliver their results in the same cycle; this is this design's choice.
//
// Timing: the multiplier output and the adder output are registered, so a one-pass result is
// valid 2 cycles after the input is accepted and a two-pass result (EXP, SILU) 4 cycles after. A second
// pass re-enters the multiplier stage; in that cycle in_ready is low. Results leave in input
// order. The pipeline structure and the valid/ready handshake are this design's choices.
module rpe
  import marca_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  output logic    in_ready,
  input  rpe_op_e op,
  input  fp32_t   a,
  input  fp32_t   b,
  input  fp32_t   c0,
  input  fp32_t   c1,
  input  fp32_t   c2,
  output logic    out_valid,
  output fp32_t   out
);

  // Multiplier stage register.
  logic    m_valid, m_two, m_second, m_const, m_quad;
  fp32_t   m_prod, m_addend, m_x;
  rpe_op_e m_op;
  // Adder stage register.
  logic    a_valid, a_two, a_second, a_const, a_quad;
  fp32_t   a_sum, a_x;
  rpe_op_e a_op;

  // Range detector for a new SiLU input.
  logic [1:0] seg;
  fp32_t      silu_k, silu_d, silu_c;
  silu_range_detector u_range (.x(a), .seg(seg), .mul_k(silu_k), .add_k(silu_d), .const_out(silu_c));

  // EXP shift unit on the first-pass result.
  logic [31:0] shifted;
  exp_shift_unit u_shift (.x(a_sum), .y(shifted));

  logic  recirc;               // first-pass result re-enters the multiplier stage
  logic  accept;
  fp32_t mx, my, madd, prod, sum;
  logic  n_two, n_const, n_quad;

  assign recirc   = a_valid && a_two && !a_second;
  assign in_ready = !recirc;
  assign accept   = in_valid && in_ready;

  // Opcode detector: operands of a new input.
  always_comb begin
    mx = a; my = FP_ONE; madd = FP_ZERO; n_two = 1'b0; n_const = 1'b0; n_quad = 1'b0;
    unique case (op)
      RPE_MUL:  begin my = b;                      end
      RPE_ADD:  begin madd = b;                    end
      RPE_EXP:  begin my = c0; madd = c1; n_two = 1'b1; end
      RPE_SILU: begin
        my = silu_k; madd = silu_d;
        n_two   = 1'b1;
        n_quad  = (seg == 2'd2);
        n_const = (seg == 2'd0);
      end
    endcase
    if (recirc) begin
      if (a_op == RPE_EXP) begin
        mx = shifted; my = FP_ONE; madd = c2;
      end else if (a_quad) begin
        mx = a_sum;   my = a_x;    madd = SILU_Q_C;
      end else begin
        mx = a_sum;   my = FP_ONE; madd = FP_ZERO;   // identity pass keeps all RPEs in step
      end
    end
  end

  fp_mul u_mul (.a(mx), .b(my), .y(prod));
  fp_add u_add (.a(m_prod), .b(m_addend), .y(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= 1'b0; m_two <= 1'b0; m_second <= 1'b0; m_const <= 1'b0; m_quad <= 1'b0;
      m_prod <= FP_ZERO; m_addend <= FP_ZERO; m_x <= FP_ZERO; m_op <= RPE_MUL;
      a_valid <= 1'b0; a_two <= 1'b0; a_second <= 1'b0; a_const <= 1'b0; a_quad <= 1'b0;
      a_sum <= FP_ZERO; a_x <= FP_ZERO; a_op <= RPE_MUL;
    end else begin
      // multiplier stage
      if (recirc) begin
        m_valid <= 1'b1; m_two <= 1'b1; m_second <= 1'b1; m_const <= a_const; m_quad <= a_quad;
        m_x <= a_x; m_op <= a_op;
      end else begin
        m_valid <= accept; m_two <= n_two; m_second <= 1'b0; m_const <= n_const; m_quad <= n_quad;
        m_x <= a; m_op <= op;
      end
      m_prod   <= prod;
      m_addend <= madd;
      // adder stage
      a_valid  <= m_valid;
      a_two    <= m_two;
      a_second <= m_second;
      a_const  <= m_const;
      a_quad   <= m_quad;
      a_x      <= m_x;
      a_op     <= m_op;
      a_sum    <= sum;
    end
  end

  // Output multiplexer: constant output or the adder result.
  assign out_valid = a_valid && !(a_two && !a_second);
  assign out       = a_const ? SILU_CONST : a_sum;

  // silu_c equals SILU_CONST; the constant output is taken from the package directly.
  logic unused_c;
  assign unused_c = ^silu_c;

endmodule
