// tb_marca_top: runs a complete program on the accelerator, end to end, at a reduced size
// (2 RCUs, 28 buffer rows per bank), with the global memory modelled by gm_model.
//
// Program (15 instructions, fetched from global memory):
//   LOAD X (4 tiles), LOAD W (4 tiles), LOAD E (8 tiles)
//   LIN   Y = W0*X0 + W1*X1 in every RCU (matrix product with accumulation, K = 2)
//   EXP   exp(E) with the fast biased exponential, constants from CRegs
//   SILU  silu(E), piecewise
//   EWM   exp(E) * silu(E)          (register operand)
//   EWA   that + 1.5                (immediate operand)
//   NORM  layer normalization of Y's first tile
//   STORE each result back to global memory
// Every result is checked against a reference computed here in real arithmetic, and each
// mechanism of the design must have been exercised: the matrix mode with accumulation, the
// element-wise bypass, the EXP and SiLU modes, the RPE recirculation stall, all four SiLU
// segments, the immediate operand, the normalization unit, loads, stores and instruction
// buffering.
module tb_marca_top;
  import marca_pkg::*;
  import tb_fp_pkg::*;

  localparam int NR = 2;
  localparam int GW = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, done;
  logic [31:0] prog_base = 0, prog_len = 0;
  logic reg_we = 0, creg_we = 0;
  logic [3:0] reg_idx = 0;
  logic [31:0] reg_wdata = 0;
  logic imem_req_valid, imem_req_ready, imem_rsp_valid;
  logic [31:0] imem_req_addr;
  logic [63:0] imem_rsp_data;
  logic gm_req_valid, gm_req_ready, gm_req_we, gm_rsp_valid;
  logic [31:0] gm_req_addr;
  logic [GW*32-1:0] gm_req_wdata, gm_rsp_rdata;

  marca_top #(.NUM_RCU(NR), .BUF_DEPTH(28), .AW(5), .GM_WORDS(GW), .IBUF_DEPTH(8)) dut (.*);
  gm_model #(.GM_WORDS(GW), .WORDS(32768), .INSTS(64)) gm (.*);

  int checks = 0, failures = 0;
  int n_mm_acc = 0, n_bypass = 0, n_exp = 0, n_silu = 0, n_stall = 0, n_imm = 0;
  int n_norm = 0, n_load = 0, n_store = 0, n_ibuf = 0;
  int seg_cnt [4];

  always @(posedge clk) if (rst_n) begin
    if (dut.u_ce.u_ctrl.in_valid && dut.u_ce.u_ctrl.in_ready && dut.u_ce.mode == MODE_MM && !dut.u_ce.mm_first) n_mm_acc++;
    if (dut.u_ce.wr_en[0] && dut.u_ce.mode == MODE_EW)   n_bypass++;
    if (dut.u_ce.wr_en[0] && dut.u_ce.mode == MODE_EXP)  n_exp++;
    if (dut.u_ce.wr_en[0] && dut.u_ce.mode == MODE_SILU) n_silu++;
    if (dut.u_ce.u_ctrl.in_valid && !dut.u_ce.u_ctrl.in_ready) n_stall++;
    if (dut.start_ce && dut.cfg.imm) n_imm++;
    if (dut.start_nu) n_norm++;
    if (dut.start_mah && dut.cfg.opcode == OP_LOAD)  n_load++;
    if (dut.start_mah && dut.cfg.opcode == OP_STORE) n_store++;
    if (dut.ib_count > 1) n_ibuf++;
  end

  function automatic logic [63:0] enc(opcode_e op, int r0, int r1, int r2, int r3, int r4, int r5);
    return {4'(op), 4'(r0), 4'(r1), 4'(r2), 4'(r3), 4'(r4), 4'(r5), 36'd0};
  endfunction
  function automatic logic [63:0] enc_imm(opcode_e op, int r0, int r1, int r2, logic [31:0] imm);
    return {4'(op), 4'(r0), 4'(r1), 4'(r2), imm, 15'd0, 1'b1};
  endfunction
  function automatic logic [63:0] enc_mem(opcode_e op, int r0, int r1, int r2, logic [31:0] imm);
    return {4'(op), 4'(r0), 4'(r1), 4'(r2), imm, 16'd0};
  endfunction

  task automatic set_reg(bit c, int idx, logic [31:0] v);
    @(negedge clk);
    reg_we = !c; creg_we = c; reg_idx = 4'(idx); reg_wdata = v;
    @(negedge clk);
    reg_we = 0; creg_we = 0;
  endtask

  function automatic real gmr(int w);
    return f2r(gm.mem[w]);
  endfunction

  function automatic real exp_ref(fp32_t x, fp32_t ka, fp32_t kb, fp32_t kc);
    fp32_t p, s;
    longint unsigned u;
    p = r2f(f2r(x) * f2r(ka));
    s = r2f(f2r(p) + f2r(kb));
    u = longint'($floor(absr(f2r(s)) * 8388608.0));
    return f2r(r2f(f2r(32'(u)) + f2r(kc)));
  endfunction

  function automatic real silu_ref(real x);
    if (x < -5.0)  return -0.0135;
    if (x < -1.5)  return -0.06244 * x - 0.3457;
    if (x <= 0.75) return 0.232 * (x + 1.181) * (x + 1.181) - 0.275;
    return 1.05 * x - 0.2781;
  endfunction

  task automatic chk(logic [31:0] got, real expv, real rel, real abst, string what);
    checks++;
    if (!near(got, expv, rel, abst)) begin
      failures++;
      if (failures < 10) $display("%s: got %f expected %f", what, f2r(got), expv);
    end
  endtask

  localparam int OUT = 8192;
  fp32_t CA, CB, CC;

  initial begin
    int cyc;
    CA = r2f(1.0 / 0.6931471805599453); CB = r2f(126.94); CC = r2f(1.0e-5);
    // data: X at 0, W at 1024, E at 2048 (tiles of 256 words)
    for (int w = 0; w < 1024; w++) gm.mem[w] = r2f(real'(int'($urandom_range(2000)) - 1000) / 1000.0);
    for (int w = 0; w < 1024; w++) gm.mem[1024 + w] = r2f(real'(int'($urandom_range(2000)) - 1000) / 1000.0);
    for (int w = 0; w < 2048; w++) begin
      real x;
      x = -7.0 + 11.0 * real'(w) / 2047.0;
      gm.mem[2048 + w] = r2f(x);
      seg_cnt[(x < -5.0) ? 0 : (x < -1.5) ? 1 : (x <= 0.75) ? 2 : 3]++;
    end
    // program
    // register map: R0=0 R1=1 R2=2 R4=4 R5=5 R6=9 R7=13 R8=17 R9=21 R10=25 R11=8
    gm.imem[0]  = enc_mem(OP_LOAD, 0, 4, 0, 0);           // X (4 tiles) -> rows 0,1
    gm.imem[1]  = enc_mem(OP_LOAD, 2, 4, 0, 1024);        // W (4 tiles) -> rows 2,3
    gm.imem[2]  = enc_mem(OP_LOAD, 5, 11, 0, 2048);        // E (8 tiles) -> rows 5..8   (size in R11 = 8)
    gm.imem[3]  = enc(OP_LIN, 4, 1, 2, 2, 0, 2);          // Y row 4 = W(rows 2,3) x X(rows 0,1)
    gm.imem[4]  = enc(OP_EXP, 6, 4, 5, 3, 4, 5);          // rows 9..12  = exp(rows 5..8)
    gm.imem[5]  = enc(OP_SILU, 7, 4, 5, 0, 0, 0);         // rows 13..16 = silu(rows 5..8)
    gm.imem[6]  = enc(OP_EWM, 8, 4, 6, 7, 0, 0);          // rows 17..20 = rows 9..12 * rows 13..16
    gm.imem[7]  = enc_imm(OP_EWA, 9, 4, 8, 32'h3FC0_0000); // rows 21..24 = rows 17..20 + 1.5
    gm.imem[8]  = enc(OP_NORM, 10, 1, 4, 0, 0, 0);        // bank 0 row 25 = norm(bank 0 row 4)
    gm.imem[9]  = enc_mem(OP_STORE, 4, 2, 0, OUT);
    gm.imem[10] = enc_mem(OP_STORE, 6, 11, 0, OUT + 512);
    gm.imem[11] = enc_mem(OP_STORE, 7, 11, 0, OUT + 2560);
    gm.imem[12] = enc_mem(OP_STORE, 8, 11, 0, OUT + 4608);
    gm.imem[13] = enc_mem(OP_STORE, 9, 11, 0, OUT + 6656);
    gm.imem[14] = enc_mem(OP_STORE, 10, 1, 0, OUT + 8704);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // registers (map above); CReg3..5 = exponential constants
    begin
      int rv [12];
      rv = '{0, 1, 2, 3, 4, 5, 9, 13, 17, 21, 25, 8};
      for (int i = 0; i < 12; i++) set_reg(0, i, 32'(rv[i]));
    end
    set_reg(1, 3, CA); set_reg(1, 4, CB); set_reg(1, 5, CC);
    @(negedge clk);
    prog_base = 0; prog_len = 15; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (!done && cyc < 40000) begin @(negedge clk); cyc++; end
    checks++;
    if (!done) begin failures++; $display("program did not finish"); end
    $display("program finished in %0d cycles", cyc);
    repeat (3) @(negedge clk);

    // LIN: bank b holds X tiles g=b (row 0), g=2+b (row 1) and W tiles g=b (row 2), g=2+b (row 3)
    for (int b = 0; b < NR; b++)
      for (int i = 0; i < 16; i++)
        for (int j = 0; j < 16; j++) begin
          real r, m;
          r = 0.0; m = 0.0;
          for (int t = 0; t < 2; t++) for (int k = 0; k < 16; k++) begin
            real p;
            p = gmr(1024 + (b + 2*t) * 256 + i*16 + k) * gmr((b + 2*t) * 256 + k*16 + j);
            r += p; m += absr(p);
          end
          chk(gm.mem[OUT + b*256 + i*16 + j], r, 0.0, m * 2e-6 + 1e-9, "LIN");
        end
    // EXP, SILU, EWM, EWA
    for (int w = 0; w < 2048; w++) begin
      real x;
      x = gmr(2048 + w);
      chk(gm.mem[OUT + 512 + w], exp_ref(gm.mem[2048 + w], CA, CB, CC), 1e-6, 0.0, "EXP");
      chk(gm.mem[OUT + 512 + w], $exp(x), 0.07, 0.0, "EXP vs e^x");
      chk(gm.mem[OUT + 2560 + w], silu_ref(x), 2e-5, 1e-6, "SILU");
      chk(gm.mem[OUT + 4608 + w], gmr(OUT + 512 + w) * gmr(OUT + 2560 + w), 1.2e-7, 0.0, "EWM");
      chk(gm.mem[OUT + 6656 + w], gmr(OUT + 4608 + w) + 1.5, 1.2e-7, 1e-7, "EWA");
    end
    // NORM of Y's first tile (bank 0)
    begin
      real mean, var_, rs;
      mean = 0.0; var_ = 0.0;
      for (int w = 0; w < 256; w++) mean += gmr(OUT + w);
      mean /= 256.0;
      for (int w = 0; w < 256; w++) var_ += (gmr(OUT + w) - mean) * (gmr(OUT + w) - mean);
      var_ /= 256.0;
      rs = 1.0 / $sqrt(var_ + 1e-5);
      for (int w = 0; w < 256; w++) chk(gm.mem[OUT + 8704 + w], (gmr(OUT + w) - mean) * rs, 1e-4, 1e-4, "NORM");
    end

    // every mechanism must have happened
    begin
      int cnt [14];
      string nm [14];
      cnt = '{n_mm_acc, n_bypass, n_exp, n_silu, n_stall, n_imm, n_norm, n_load, n_store, n_ibuf,
              seg_cnt[0], seg_cnt[1], seg_cnt[2], seg_cnt[3]};
      nm  = '{"MM accumulation", "EW bypass", "EXP mode", "SiLU mode", "recirculation stall",
              "immediate operand", "NORM", "LOAD", "STORE", "instruction buffering",
              "SiLU constant segment", "SiLU segment 1", "SiLU quadratic segment", "SiLU segment 3"};
      for (int i = 0; i < 14; i++) begin
        $display("  %-24s %0d", nm[i], cnt[i]);
        checks++;
        if (cnt[i] == 0) begin failures++; $display("mechanism never exercised: %s", nm[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (60000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
