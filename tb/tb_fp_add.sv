// tb_fp_add: checks the single-precision adder against the simulator's real arithmetic rounded
// to single precision, allowing one unit in the last place (the double sum can round twice),
// on random operands of nearby and distant magnitude, cancellation, and zero operands.
module tb_fp_add;
  import tb_fp_pkg::*;
  logic [31:0] a, b, y, r;
  int checks = 0, failures = 0;
  fp_add dut (.a, .b, .y);
  function automatic bit ulp1(logic [31:0] p, logic [31:0] q);
    int d;
    if (p[31] != q[31]) return (p[30:0] == 0 && q[30:0] == 0);
    d = int'(p[30:0]) - int'(q[30:0]);
    return d <= 1 && d >= -1;
  endfunction
  initial begin
    for (int i = 0; i < 4000; i++) begin
      a = rand_fp(-20, 20);
      b = (i % 3 == 0) ? {~a[31], a[30:4], 4'($urandom)} : rand_fp(-20, 20);
      #1;
      r = r2f(f2r(a) + f2r(b));
      checks++;
      if (!ulp1(y, r) && !(r[30:23] == 0 && y[30:0] == 0)) begin
        failures++;
        if (failures < 5) $display("add %h + %h = %h, expected %h", a, b, y, r);
      end
    end
    a = 32'h3F80_0000; b = 32'h3F80_0000; #1; checks++; if (y !== 32'h4000_0000) failures++; // 1+1
    a = 32'h4040_0000; b = 32'hC040_0000; #1; checks++; if (y !== 32'h0) failures++;          // 3-3
    a = 32'h0; b = 32'hC0A0_0000; #1; checks++; if (y !== 32'hC0A0_0000) failures++;          // 0+(-5)
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
