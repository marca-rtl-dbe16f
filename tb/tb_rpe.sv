// tb_rpe: drives one reconfigurable PE with streams of multiplications, additions, exponentials
// and SiLUs, offering a new input every cycle, and checks every result, its order, and the
// latency (2 cycles for MUL/ADD, 4 for EXP and SILU) against reference models computed here:
//   MUL/ADD  real arithmetic rounded to single precision
//   EXP      the fast biased exponential step by step (a*x, +b, floor(x'*2^23) as float, +c),
//            and that it lies within 7% of e^x for x in [-7, 0]
//   SILU     the four-segment formula evaluated in real arithmetic
module tb_rpe;
  import marca_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic    in_valid, in_ready, out_valid;
  rpe_op_e op;
  fp32_t   a, b, c0, c1, c2, out;
  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle++;

  rpe dut (.clk, .rst_n, .in_valid, .in_ready, .op, .a, .b, .c0, .c1, .c2, .out_valid, .out);

  real   exp_q[$];
  real   tol_q[$];
  int    t_q[$];
  int    lat_exp;
  int    seg_seen[4];

  function automatic real silu_ref(real x);
    if (x < -5.0)  return -0.0135;
    if (x < -1.5)  return -0.06244 * x - 0.3457;
    if (x <= 0.75) return 0.232 * (x + 1.181) * (x + 1.181) - 0.275;
    return 1.05 * x - 0.2781;
  endfunction

  function automatic real exp_ref(fp32_t x, fp32_t ka, fp32_t kb, fp32_t kc);
    fp32_t p, s;
    longint unsigned u;
    p = r2f(f2r(x) * f2r(ka));
    s = r2f(f2r(p) + f2r(kb));
    u = longint'($floor(absr(f2r(s)) * 8388608.0));
    return f2r(r2f(f2r(32'(u)) + f2r(kc)));
  endfunction

  // output checker, sampled mid-cycle
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected output");
      end else begin
        real e, t;
        int  t0;
        e = exp_q.pop_front(); t = tol_q.pop_front(); t0 = t_q.pop_front();
        if (!near(out, e, t, 1e-7)) begin
          failures++;
          if (failures < 8) $display("op %0d: got %f expected %f", op, f2r(out), e);
        end
        checks++;
        if (cycle - t0 != lat_exp) begin
          failures++;
          if (failures < 8) $display("latency %0d expected %0d", cycle - t0, lat_exp);
        end
      end
    end
  end

  task automatic run(rpe_op_e o, int n, int lat);
    @(posedge clk); #1;
    op = o; lat_exp = lat;
    for (int i = 0; i < n; i++) begin
      real xv;
      case (o)
        RPE_MUL: begin a = rand_fp(-10, 10); b = rand_fp(-10, 10);
                 exp_q.push_back(f2r(r2f(f2r(a) * f2r(b)))); tol_q.push_back(0.0); end
        RPE_ADD: begin a = rand_fp(-10, 10); b = rand_fp(-10, 10);
                 exp_q.push_back(f2r(a) + f2r(b)); tol_q.push_back(1.2e-7); end
        RPE_EXP: begin
                 xv = -7.0 * real'($urandom_range(10000)) / 10000.0;
                 a = r2f(xv);
                 exp_q.push_back(exp_ref(a, c0, c1, c2)); tol_q.push_back(1e-6);
                 checks++;
                 if (!near(r2f(exp_ref(a, c0, c1, c2)), $exp(xv), 0.07, 0.0)) failures++;
                 end
        default: begin
                 xv = -8.0 + 13.0 * real'($urandom_range(10000)) / 10000.0;
                 a = r2f(xv);
                 seg_seen[(xv < -5.0) ? 0 : (xv < -1.5) ? 1 : (xv <= 0.75) ? 2 : 3]++;
                 exp_q.push_back(silu_ref(f2r(a))); tol_q.push_back(2e-5);
                 end
      endcase
      in_valid = 1;
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      t_q.push_back(cycle);
      @(posedge clk);
      #1;
    end
    in_valid = 0;
    repeat (8) @(posedge clk);
  endtask

  initial begin
    in_valid = 0; op = RPE_MUL; a = 0; b = 0;
    c0 = r2f(1.0 / 0.6931471805599453);  // a
    c1 = r2f(126.94);                      // b = 127 + bias
    c2 = r2f(1.0e-5);                      // c, the final bias
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    $display("start %0t", $time); run(RPE_MUL, 300, 2); $display("mul done %0t checks %0d fail %0d", $time, checks, failures);
    @(negedge clk); run(RPE_ADD, 300, 2);
    @(negedge clk); run(RPE_EXP, 300, 4);
    @(negedge clk); run(RPE_SILU, 400, 4);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d results missing", exp_q.size()); end
    for (int s = 0; s < 4; s++) begin
      checks++;
      if (seg_seen[s] == 0) begin failures++; $display("segment %0d never exercised", s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
