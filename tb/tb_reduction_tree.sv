// tb_reduction_tree: feeds random products and accumulator values into the 16 slices of
// 16-to-1 adder trees and checks each slice's sum (products plus the third, accumulating input)
// against a real-arithmetic reference.
module tb_reduction_tree;
  import marca_pkg::*;
  import tb_fp_pkg::*;
  fp32_t [15:0][15:0] p;
  fp32_t [15:0] acc, sum;
  int checks = 0, failures = 0;
  reduction_tree dut (.p, .acc, .sum);
  initial begin
    for (int it = 0; it < 50; it++) begin
      real ref_s [16];
      real mag [16];
      for (int s = 0; s < 16; s++) begin
        ref_s[s] = 0.0; mag[s] = 0.0;
        for (int k = 0; k < 16; k++) begin
          p[s][k] = rand_fp(-4, 4);
          ref_s[s] += f2r(p[s][k]); mag[s] += absr(f2r(p[s][k]));
        end
        acc[s] = (it % 2 == 0) ? 32'h0 : rand_fp(-2, 6);
        ref_s[s] += f2r(acc[s]); mag[s] += absr(f2r(acc[s]));
      end
      #1;
      for (int s = 0; s < 16; s++) begin
        checks++;
        if (!near(sum[s], ref_s[s], 0.0, mag[s] * 1e-6)) begin
          failures++;
          if (failures < 5) $display("slice %0d: %f expected %f", s, f2r(sum[s]), ref_s[s]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
