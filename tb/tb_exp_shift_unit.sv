// tb_exp_shift_unit: checks the exponent shift unit. The reference is floor(|x'| * 2^23)
// computed in real arithmetic; the worked example of the shift-unit figure (sign 1, exponent
// giving a shift of 2, mantissa 101000..., result 0x0340_0000) is checked by name.
module tb_exp_shift_unit;
  import tb_fp_pkg::*;
  logic [31:0] x, y;
  longint unsigned expv;
  int checks = 0, failures = 0;
  exp_shift_unit dut (.x, .y);
  initial begin
    // figure example: 1 | exponent for a shift of 2 | 1010000...
    x = {1'b1, 8'd129, 23'b101_0000_0000_0000_0000_0000};
    #1; checks++;
    if (y !== 32'h0340_0000) begin failures++; $display("figure example: %h", y); end
    for (int i = 0; i < 3000; i++) begin
      x = {1'($urandom), 8'(127 - 23 + int'($urandom_range(31))), 23'($urandom)};
      #1;
      expv = longint'($floor(absr(f2r(x)) * 8388608.0));
      checks++;
      if (y !== expv[31:0]) begin
        failures++;
        if (failures < 5) $display("x=%h y=%h expected %h", x, y, expv[31:0]);
      end
    end
    // out of range: saturates
    x = 32'h4F80_0000; #1; checks++; if (y !== 32'hFFFF_FFFF) failures++;
    // the fast exponential built from it: x' = x/ln2 + 127, bits read as float ~ e^x
    for (int i = 0; i < 200; i++) begin
      real xr;
      xr = -7.0 / real'(i + 1);
      x = r2f(xr / 0.6931471805599453 + 127.0);
      #1; checks++;
      if (!near(y, $exp(xr), 0.07, 0.0)) begin
        failures++;
        $display("fast exp(%f) = %f", xr, f2r(y));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
