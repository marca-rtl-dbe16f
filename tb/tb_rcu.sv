// tb_rcu: one 16x16 RCU in all four configurations.
//   MM-RCU  : Y = W0*X0 + W1*X1 (two 16x16 tile products accumulated through the tree's third
//             input), fed one column of X per cycle; checked against a real-arithmetic matrix
//             product, and the output tile must appear 3 cycles after the last column.
//   EW-RCU  : element-wise multiplication and addition of two tiles, 2-cycle latency, reduction
//             tree bypassed (every one of the 256 results checked).
//   EXP-RCU : fast exponential of a tile, 4-cycle latency, within 7% of e^x.
//   SiLU-RCU: piecewise SiLU of a tile whose entries fall in all four segments, 4-cycle latency.
module tb_rcu;
  import marca_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cycle = 0;
  always @(posedge clk) cycle++;

  rcu_mode_e mode;
  rpe_op_e   ew_op;
  logic      in_valid, in_ready, out_valid, mm_first, mm_last;
  logic [3:0] mm_col;
  tile_t     a, b, out;
  fp32_t     c0, c1, c2;
  int checks = 0, failures = 0;

  rcu dut (.clk, .rst_n, .mode, .ew_op, .in_valid, .in_ready, .a, .b, .c0, .c1, .c2,
           .mm_col, .mm_first, .mm_last, .out_valid, .out);

  tile_t w0, w1, x0, x1;
  bit    in_valid_phase = 0;   // 1 while the caller is already just past a rising edge

  task automatic rand_tile(output tile_t t, input int emin, input int emax);
    for (int i = 0; i < 16; i++) for (int k = 0; k < 16; k++) t[i][k] = rand_fp(emin, emax);
  endtask

  // Offer one operand set; returns the cycle it was accepted in.
  task automatic offer(output int t_acc);
    if (!in_valid_phase) begin @(posedge clk); #1; end
    in_valid = 1;
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    t_acc = cycle;
    @(posedge clk); #1;
    in_valid = 0;
  endtask

  task automatic wait_out(input int t0, input int lat, input string what);
    int n = 0;
    @(negedge clk);
    while (!out_valid && n < 20) begin @(negedge clk); n++; end
    checks++;
    if (cycle - t0 != lat) begin failures++; $display("%s latency %0d expected %0d (t0 %0d)", what, cycle - t0, lat, t0); end
  endtask

  initial begin
    int t0;
    in_valid = 0; mode = MODE_MM; ew_op = RPE_MUL; mm_first = 0; mm_last = 0; mm_col = 0;
    c0 = r2f(1.0 / 0.6931471805599453); c1 = r2f(126.94); c2 = r2f(1.0e-5);
    a = '0; b = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    // ---------------- MM ----------------
    rand_tile(w0, -3, 3); rand_tile(w1, -3, 3); rand_tile(x0, -3, 3); rand_tile(x1, -3, 3);
    mode = MODE_MM;
    for (int t = 0; t < 2; t++) begin
      for (int j = 0; j < 16; j++) begin
        a = t ? w1 : w0; b = t ? x1 : x0;
        mm_col = 4'(j); mm_first = (t == 0); mm_last = (t == 1 && j == 15);
        in_valid_phase = 1;          // columns back to back
        offer(t0);
      end
    end
    mm_last = 0; in_valid_phase = 0;
    wait_out(t0, 3, "MM");
    for (int i = 0; i < 16; i++) for (int j = 0; j < 16; j++) begin
      real r, m;
      r = 0.0; m = 0.0;
      for (int k = 0; k < 16; k++) begin
        r += f2r(w0[i][k]) * f2r(x0[k][j]) + f2r(w1[i][k]) * f2r(x1[k][j]);
        m += absr(f2r(w0[i][k]) * f2r(x0[k][j])) + absr(f2r(w1[i][k]) * f2r(x1[k][j]));
      end
      checks++;
      if (!near(out[i][j], r, 0.0, m * 2e-6)) begin
        failures++;
        if (failures < 5) $display("MM [%0d][%0d] %f expected %f", i, j, f2r(out[i][j]), r);
      end
    end

    // ---------------- EW multiply and add ----------------
    for (int o = 0; o < 2; o++) begin
      mode = MODE_EW; ew_op = o ? RPE_ADD : RPE_MUL;
      rand_tile(a, -5, 5); rand_tile(b, -5, 5);
      offer(t0);
      wait_out(t0, 2, "EW");
      for (int i = 0; i < 16; i++) for (int k = 0; k < 16; k++) begin
        checks++;
        if (!near(out[i][k], o ? f2r(a[i][k]) + f2r(b[i][k]) : f2r(a[i][k]) * f2r(b[i][k]), 1.2e-7, 0.0)) begin failures++; $display("EW%0d %h %h -> %h", o, a[i][k], b[i][k], out[i][k]); end
      end
    end

    // ---------------- EXP ----------------
    mode = MODE_EXP;
    for (int i = 0; i < 16; i++) for (int k = 0; k < 16; k++) a[i][k] = r2f(-7.0 * real'(i * 16 + k) / 255.0);
    offer(t0);
    wait_out(t0, 4, "EXP");
    for (int i = 0; i < 16; i++) for (int k = 0; k < 16; k++) begin
      checks++;
      if (!near(out[i][k], $exp(f2r(a[i][k])), 0.07, 0.0)) failures++;
    end

    // ---------------- SiLU ----------------
    mode = MODE_SILU;
    for (int i = 0; i < 16; i++) for (int k = 0; k < 16; k++) a[i][k] = r2f(-8.0 + 13.0 * real'(i * 16 + k) / 255.0);
    offer(t0);
    wait_out(t0, 4, "SILU");
    for (int i = 0; i < 16; i++) for (int k = 0; k < 16; k++) begin
      real x, r;
      x = f2r(a[i][k]);
      r = (x < -5.0) ? -0.0135 : (x < -1.5) ? -0.06244 * x - 0.3457 :
          (x <= 0.75) ? 0.232 * (x + 1.181) * (x + 1.181) - 0.275 : 1.05 * x - 0.2781;
      checks++;
      if (!near(out[i][k], r, 2e-5, 1e-6)) begin
        failures++;
        if (failures < 5) $display("SILU(%f) = %f expected %f", x, f2r(out[i][k]), r);
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
