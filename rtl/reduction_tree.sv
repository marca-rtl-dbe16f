// reduction_tree: the RCU's reduction tree, SLICES slices of N-to-1 floating-point adder trees.
//
// Slice i adds the N products of PE row i pairwise over log2(N) levels. The last level has a
// third input, acc[i], so that partial sums of a matrix product can be accumulated across
// passes (here a second adder after the last two-input level, which is how this design builds
// the three-input addition). With N = 16 a slice has 8, 4, 2 and 1 adders plus the accumulating
// one. Slice count, fan-in and the three-input last level follow the accelerator; building the
// three-input add from two chained two-input adders, and leaving the tree combinational (the
// RCU registers its result), are this design's choices.
//
// In non-reduction mode the RCU takes the RPE outputs around this tree; the tree itself only
// reduces.
//
// Interface: combinational, sum[i] = acc[i] + sum_k p[i][k].
module reduction_tree
  import marca_pkg::*;
#(
  parameter int unsigned SLICES = 16,
  parameter int unsigned N      = 16     // power of two
) (
  input  fp32_t [SLICES-1:0][N-1:0] p,
  input  fp32_t [SLICES-1:0]        acc,
  output fp32_t [SLICES-1:0]        sum
);

  localparam int unsigned LEVELS = $clog2(N);

  for (genvar s = 0; s < SLICES; s++) begin : g_slice
    for (genvar l = 0; l < LEVELS; l++) begin : g_lvl
      fp32_t v [N >> (l + 1)];       // level l+1 partial sums
      for (genvar i = 0; i < (N >> (l + 1)); i++) begin : g_add
        if (l == 0) begin : g_first
          fp_add u_add (.a(p[s][2*i]), .b(p[s][2*i+1]), .y(v[i]));
        end else begin : g_next
          fp_add u_add (.a(g_lvl[l-1].v[2*i]), .b(g_lvl[l-1].v[2*i+1]), .y(v[i]));
        end
      end
    end
    // last level: third input accumulates the partial sum
    fp_add u_acc (.a(g_lvl[LEVELS-1].v[0]), .b(acc[s]), .y(sum[s]));
  end

endmodule
