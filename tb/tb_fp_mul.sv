// tb_fp_mul: checks the single-precision multiplier against the simulator's real arithmetic
// rounded to single precision (exact: the double product of two singles is exact, so rounding it
// once gives the correctly rounded result), on random operands and on zero operands.
module tb_fp_mul;
  import tb_fp_pkg::*;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;
  fp_mul dut (.a, .b, .y);
  initial begin
    for (int i = 0; i < 4000; i++) begin
      a = rand_fp(-30, 30); b = rand_fp(-30, 30);
      #1;
      checks++;
      if (y !== r2f(f2r(a) * f2r(b))) begin
        failures++;
        if (failures < 5) $display("mul %h * %h = %h, expected %h", a, b, y, r2f(f2r(a) * f2r(b)));
      end
    end
    a = 32'h0; b = 32'h4049_0FDB; #1; checks++; if (y[30:0] !== 31'd0) failures++;
    a = 32'h3FC0_0000; b = 32'h4000_0000; #1; checks++; if (y !== 32'h4040_0000) failures++; // 1.5*2=3
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
