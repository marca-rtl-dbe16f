// norm_unit: layer normalization unit (ADD, MEAN, VAR and LINEAR stages).
//
// NORM normalizes the vector of n = out_size * 256 words that starts at row in0_addr of buffer
// bank 0 and writes y = (x - mean) / sqrt(var + 1e-5) to the rows from out_addr on. It runs in
// passes over the vector, one word per cycle:
//   ADD    sum of x                                      n cycles
//   MEAN   mean = sum * (1/n)                            1/n by Newton iterations
//   VAR    sum of (x - mean)^2, var = that * (1/n)       n cycles
//   LINEAR y = (x - mean) * rsqrt(var + eps)             n cycles, a row written every 256 words
// The reciprocal and the reciprocal square root are found by four Newton iterations each from
// the usual bit-level first guesses (0x7EF311C3 - bits(n) and 0x5F3759DF - bits(v)/2), with the
// unit's one multiplier and accumulating adder.
// The four stages and "accumulate for the mean, then the variance, then a linear unit" follow
// the accelerator; the accelerator gives no more detail, so the vector layout, the one-word-per-
// cycle rate, the Newton iterations, eps = 1e-5 and the absence of a learned scale and shift
// (the ISA's NORM carries no operand for them) are this design's choices.
//
// Interface: start/cfg/busy/done; a tile-wide read port and write port on bank 0.
module norm_unit
  import marca_pkg::*;
#(
  parameter int unsigned AW = 10
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  cfg_t          cfg,
  output logic          busy,
  output logic          done,
  output logic [AW-1:0] rd_addr,
  input  tile_t         rd_data,
  output logic          wr_en,
  output logic [AW-1:0] wr_addr,
  output tile_t         wr_data
);

  localparam fp32_t FP_TWO  = 32'h4000_0000;
  localparam fp32_t FP_1P5  = 32'h3FC0_0000;
  localparam fp32_t FP_HALF = 32'h3F00_0000;
  localparam fp32_t FP_EPS  = 32'h3727_C5AC;   // 1e-5
  localparam int unsigned NEWTON = 4;

  typedef enum logic [2:0] {S_IDLE, S_ADD, S_RECIP, S_VAR, S_RSQRT, S_LINEAR} state_e;
  state_e state;

  logic [31:0] out_addr, in_addr, n, e;
  logic [5:0]  step;
  fp32_t acc, nf, r, t, mean, hv, y;
  tile_t tile_q, tile_d;

  // int to float (truncating) for the element count.
  function automatic fp32_t int2fp(logic [31:0] v);
    int p;
    logic [31:0] sh;
    p = 0;
    for (int i = 0; i < 32; i++) if (v[i]) p = i;
    if (v == 32'd0) return FP_ZERO;
    sh = v << (31 - p);
    return {1'b0, 8'(127 + p), sh[30:8]};
  endfunction

  // Current element.
  fp32_t x;
  logic [7:0] col;
  assign col     = e[7:0];
  assign rd_addr = AW'(in_addr + (e >> 8));
  assign x       = rd_data[col[7:4]][col[3:0]];

  // Shared arithmetic: sub = x - mean, one multiplier, one accumulating adder.
  fp32_t sub_y, mul_a, mul_b, mul_y, add_a, add_b, add_y;
  fp_add u_sub (.a(x), .b(mean ^ 32'h8000_0000), .y(sub_y));
  fp_mul u_mul (.a(mul_a), .b(mul_b), .y(mul_y));
  fp_add u_add (.a(add_a), .b(add_b), .y(add_y));

  // Micro-step of the Newton phases: 3 steps per reciprocal iteration, 4 per rsqrt iteration.
  logic [1:0] sub_step;
  assign sub_step = (state == S_RECIP) ? 2'(step % 3) : step[1:0];

  always_comb begin
    mul_a = sub_y; mul_b = sub_y; add_a = acc; add_b = x;
    unique case (state)
      S_ADD:    begin add_a = acc; add_b = x; end
      S_VAR:    begin mul_a = sub_y; mul_b = sub_y; add_a = acc; add_b = mul_y; end
      S_LINEAR: begin mul_a = sub_y; mul_b = y; end
      S_RECIP: begin
        // t = nf*r ; t = 2 - t ; r = r*t ; after the last iteration mean = acc*r
        if (step == 6'(3 * NEWTON)) begin mul_a = acc; mul_b = r; end
        else begin
          unique case (sub_step)
            2'd0:    begin mul_a = nf; mul_b = r; end
            2'd1:    begin add_a = FP_TWO; add_b = t ^ 32'h8000_0000; end
            default: begin mul_a = r; mul_b = t; end
          endcase
        end
      end
      S_RSQRT: begin
        // step 0: var = acc*r ; 1: v = var+eps ; 2: hv = v*0.5 ; then per iteration
        // t = y*y ; t = t*hv ; t = 1.5 - t ; y = y*t
        if (step == 6'd0)      begin mul_a = acc; mul_b = r; end
        else if (step == 6'd1) begin add_a = t; add_b = FP_EPS; end
        else if (step == 6'd2) begin mul_a = t; mul_b = FP_HALF; end
        else begin
          unique case (2'(step - 6'd3))
            2'd0:    begin mul_a = y; mul_b = y; end
            2'd1:    begin mul_a = t; mul_b = hv; end
            2'd2:    begin add_a = FP_1P5; add_b = t ^ 32'h8000_0000; end
            default: begin mul_a = y; mul_b = t; end
          endcase
        end
      end
      default: ;
    endcase
  end

  // Output tile assembly.
  always_comb begin
    tile_d = tile_q;
    tile_d[col[7:4]][col[3:0]] = mul_y;
  end
  assign wr_en   = (state == S_LINEAR) && (col == 8'hFF || e == n - 32'd1);
  assign wr_addr = AW'(out_addr + (e >> 8));
  assign wr_data = tile_d;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; step <= '0;
      out_addr <= '0; in_addr <= '0; n <= '0; e <= '0;
      acc <= FP_ZERO; nf <= FP_ZERO; r <= FP_ZERO; t <= FP_ZERO; mean <= FP_ZERO;
      hv <= FP_ZERO; y <= FP_ZERO; tile_q <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          out_addr <= cfg.out_addr;
          in_addr  <= cfg.in0_addr;
          n        <= cfg.out_size << 8;
          nf       <= int2fp(cfg.out_size << 8);
          r        <= 32'h7EF3_11C3 - int2fp(cfg.out_size << 8);
          e        <= '0;
          acc      <= FP_ZERO;
          mean     <= FP_ZERO;
          if (cfg.out_size == 32'd0) done <= 1'b1;
          else                       state <= S_ADD;
        end
        S_ADD: begin
          acc <= add_y;
          e   <= e + 32'd1;
          if (e == n - 32'd1) begin state <= S_RECIP; step <= '0; end
        end
        S_RECIP: begin
          step <= step + 6'd1;
          if (step == 6'(3 * NEWTON)) begin
            mean  <= mul_y;
            acc   <= FP_ZERO;
            e     <= '0;
            state <= S_VAR;
          end else begin
            unique case (sub_step)
              2'd0:    t <= mul_y;
              2'd1:    t <= add_y;
              default: r <= mul_y;
            endcase
          end
        end
        S_VAR: begin
          acc <= add_y;
          e   <= e + 32'd1;
          if (e == n - 32'd1) begin state <= S_RSQRT; step <= '0; end
        end
        S_RSQRT: begin
          step <= step + 6'd1;
          if (step == 6'd0)      t <= mul_y;
          else if (step == 6'd1) begin
            t <= add_y;
            y <= 32'h5F37_59DF - {1'b0, add_y[31:1]};
          end
          else if (step == 6'd2) hv <= mul_y;
          else begin
            unique case (2'(step - 6'd3))
              2'd0:    t <= mul_y;
              2'd1:    t <= mul_y;
              2'd2:    t <= add_y;
              default: y <= mul_y;
            endcase
            if (step == 6'(3 + 4 * NEWTON - 1)) begin
              e     <= '0;
              state <= S_LINEAR;
            end
          end
        end
        S_LINEAR: begin
          tile_q <= tile_d;
          e      <= e + 32'd1;
          if (e == n - 32'd1) begin state <= S_IDLE; done <= 1'b1; end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
