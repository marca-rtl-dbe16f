// tb_silu_range_detector: checks the segment chosen for inputs on both sides of every breakpoint
// of the piecewise SiLU (-5, -1.5, 0.75), and that the first-pass coefficients and the constant
// output evaluate to the segment's formula.
module tb_silu_range_detector;
  import tb_fp_pkg::*;
  logic [31:0] x, k, d, c;
  logic [1:0]  seg;
  int checks = 0, failures = 0;
  silu_range_detector dut (.x, .seg, .mul_k(k), .add_k(d), .const_out(c));

  task automatic probe(real xv, int exp_seg);
    real fx;
    x = r2f(xv);
    #1;
    checks++;
    if (seg !== 2'(exp_seg)) begin failures++; $display("x=%f seg=%0d expected %0d", xv, seg, exp_seg); end
    // value of the first pass k*x + d
    fx = f2r(k) * xv + f2r(d);
    checks++;
    case (exp_seg)
      0: if (!near(r2f(fx), -0.0135, 1e-5, 1e-6) || !near(c, -0.0135, 1e-5, 0.0)) failures++;
      1: if (!near(r2f(fx), -0.06244 * xv - 0.3457, 1e-5, 1e-6)) failures++;
      2: if (!near(r2f(fx * xv + 0.0485846), 0.232 * (xv + 1.181) * (xv + 1.181) - 0.275, 1e-4, 1e-5)) failures++;
      default: if (!near(r2f(fx), 1.05 * xv - 0.2781, 1e-5, 1e-6)) failures++;
    endcase
  endtask

  initial begin
    probe(-100.0, 0); probe(-5.001, 0); probe(-5.0, 1); probe(-3.0, 1); probe(-1.5001, 1);
    probe(-1.5, 2); probe(-1.0, 2); probe(0.0, 2); probe(0.5, 2); probe(0.75, 2);
    probe(0.7501, 3); probe(3.0, 3); probe(50.0, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
