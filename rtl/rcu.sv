// rcu: reconfigurable computing unit, a DIM x DIM array of RPEs and a reduction tree.
//
// Four configurations, chosen by `mode`:
//   MODE_MM   (MM-RCU)   RPE[i][k] multiplies a[i][k] by b[k][mm_col], i.e. the weight tile a
//                        times column mm_col of the input tile b. The reduction tree adds each
//                        row's DIM products and, through its three-input last level, the partial
//                        sum kept for that column. DIM columns give one DIM x DIM product;
//                        mm_first starts a new accumulation, mm_last marks the final column of
//                        the final pass, after which the finished output tile appears on `out`.
//   MODE_EW   (EW-RCU)   the tree is bypassed and the DIM x DIM RPE results go straight out;
//                        ew_op picks multiplication or addition.
//   MODE_EXP  (EXP-RCU)  as EW, every RPE runs the fast biased exponential (constants c0..c2).
//   MODE_SILU (SiLU-RCU) as EW, every RPE runs the piecewise SiLU.
// The array size, the modes, the tree with its accumulating last level and the bypass follow
// the accelerator. Keeping the partial sums and the finished tile in registers inside the RCU,
// and the column-broadcast of b, are this design's choices.
//
// Timing: all RPEs run in lock-step. EW results come 2 cycles after acceptance, EXP and
// two-pass SiLU results 4 cycles after (in_ready drops while an RPE recirculates). In MM mode
// the output tile is valid 3 cycles after the last column is accepted. A new accumulation may
// start right behind the last column of the previous one.
module rcu
  import marca_pkg::*;
#(
  parameter int unsigned DIM = PE_DIM
) (
  input  logic      clk,
  input  logic      rst_n,
  input  rcu_mode_e mode,
  input  rpe_op_e   ew_op,
  input  logic      in_valid,
  output logic      in_ready,
  input  fp32_t [DIM-1:0][DIM-1:0] a,
  input  fp32_t [DIM-1:0][DIM-1:0] b,
  input  fp32_t     c0,
  input  fp32_t     c1,
  input  fp32_t     c2,
  input  logic [$clog2(DIM)-1:0] mm_col,
  input  logic      mm_first,
  input  logic      mm_last,
  output logic      out_valid,
  output fp32_t [DIM-1:0][DIM-1:0] out
);

  typedef logic [$clog2(DIM)-1:0] col_t;

  rpe_op_e op;
  fp32_t [DIM-1:0][DIM-1:0] pe_b, pe_out;
  logic  [DIM-1:0][DIM-1:0] pe_ready, pe_valid;

  always_comb begin
    unique case (mode)
      MODE_MM:   op = RPE_MUL;
      MODE_EW:   op = ew_op;
      MODE_EXP:  op = RPE_EXP;
      MODE_SILU: op = RPE_SILU;
    endcase
    for (int i = 0; i < DIM; i++)
      for (int k = 0; k < DIM; k++)
        pe_b[i][k] = (mode == MODE_MM) ? b[k][mm_col] : b[i][k];
  end

  for (genvar i = 0; i < DIM; i++) begin : g_row
    for (genvar k = 0; k < DIM; k++) begin : g_col
      rpe u_rpe (
        .clk, .rst_n,
        .in_valid (in_valid),
        .in_ready (pe_ready[i][k]),
        .op       (op),
        .a        (a[i][k]),
        .b        (pe_b[i][k]),
        .c0, .c1, .c2,
        .out_valid(pe_valid[i][k]),
        .out      (pe_out[i][k])
      );
    end
  end

  // All RPEs see the same inputs and the same operation, so they move together.
  assign in_ready = &pe_ready;
  logic pe_out_valid;
  assign pe_out_valid = &pe_valid;

  // MM bookkeeping travels beside the two-stage RPE pipeline.
  logic [1:0] d_first, d_last;
  col_t [1:0] d_col;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_first <= '0; d_last <= '0; d_col <= '0;
    end else begin
      d_first <= {d_first[0], mm_first};
      d_last  <= {d_last[0],  mm_last};
      d_col   <= {d_col[0],   mm_col};
    end
  end

  // Reduction tree with accumulation of the partial sums of column d_col[1].
  fp32_t [DIM-1:0][DIM-1:0] psum;      // [column][row]
  fp32_t [DIM-1:0]          acc_in, red_sum;
  always_comb begin
    for (int i = 0; i < DIM; i++) acc_in[i] = d_first[1] ? FP_ZERO : psum[d_col[1]][i];
  end
  reduction_tree #(.SLICES(DIM), .N(DIM)) u_tree (.p(pe_out), .acc(acc_in), .sum(red_sum));

  logic  mm_valid;
  fp32_t [DIM-1:0][DIM-1:0] mm_tile;   // [row][column]
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      psum     <= '0;
      mm_tile  <= '0;
      mm_valid <= 1'b0;
    end else begin
      mm_valid <= 1'b0;
      if (mode == MODE_MM && pe_out_valid) begin
        psum[d_col[1]] <= red_sum;
        if (d_last[1]) begin
          mm_valid <= 1'b1;
          for (int i = 0; i < DIM; i++)
            for (int j = 0; j < DIM; j++)
              mm_tile[i][j] <= (col_t'(j) == d_col[1]) ? red_sum[i] : psum[j][i];
        end
      end
    end
  end

  // Reduction or bypass.
  assign out_valid = (mode == MODE_MM) ? mm_valid : pe_out_valid;
  assign out       = (mode == MODE_MM) ? mm_tile  : pe_out;

endmodule
