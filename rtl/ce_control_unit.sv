// ce_control_unit: control unit of the compute engine.
//
// It takes one configuration (LIN, CONV, EWM, EWA, EXP or SILU) from the configure unit, sets
// the RCUs' mode, walks the operand tiles through the on-chip buffer's two read ports, hands them
// to all RCUs at once and writes the RCUs' result tiles back through the write port; when the
// last result is written it pulses `done`, which lets the instruction pipeline go on.
//
// Addressing (row addresses are per bank; every RCU works on its own bank at the same row):
//   element-wise ops: for t < out_size:  out[out_addr+t] = f(in0[in0_addr+t], in1[in1_addr+t])
//   LIN / CONV     : K = in0_size; for o < out_size:
//                    out[out_addr+o] = sum_{t<K} in0[in0_addr+o*K+t] x in1[in1_addr+t]
//                    each tile product fed as DIM columns, one per cycle.
// The input tiles in1 of a LIN are thus read once per output tile from the buffer, never again
// from global memory: the input sharing within a linear operation. CONV uses the same
// matrix-product schedule, its operands laid out by the program as a matrix product. These
// addressing rules and the handshake are this design's choices; the accelerator describes the
// control unit only by its function.
//
// Timing: one operand set per cycle while the RCUs are ready; `done` one cycle after the last
// write.
module ce_control_unit
  import marca_pkg::*;
#(
  parameter int unsigned DIM = PE_DIM,
  parameter int unsigned AW  = 10
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  cfg_t       cfg,
  output logic       busy,
  output logic       done,
  // buffer addresses
  output logic [AW-1:0] rd_addr_a,
  output logic [AW-1:0] rd_addr_b,
  output logic          wr_en,
  output logic [AW-1:0] wr_addr,
  // RCU control
  output rcu_mode_e  mode,
  output rpe_op_e    ew_op,
  output logic       b_const,       // replace operand b by the constant c0
  output logic       in_valid,
  input  logic       in_ready,
  output logic [$clog2(DIM)-1:0] mm_col,
  output logic       mm_first,
  output logic       mm_last,
  input  logic       out_valid
);

  cfg_t        c;
  logic        is_mm, issuing;
  logic [31:0] o_cnt, t_cnt, w_cnt;
  logic [$clog2(DIM)-1:0] j_cnt;
  logic        fire, last_issue;

  assign is_mm = (c.opcode == OP_LIN) || (c.opcode == OP_CONV);

  always_comb begin
    unique case (c.opcode)
      OP_LIN, OP_CONV: mode = MODE_MM;
      OP_EXP:          mode = MODE_EXP;
      OP_SILU:         mode = MODE_SILU;
      default:         mode = MODE_EW;
    endcase
    ew_op    = (c.opcode == OP_EWA) ? RPE_ADD : RPE_MUL;
    b_const  = c.imm;
    in_valid = busy && issuing;
    fire     = in_valid && in_ready;
    if (is_mm) begin
      rd_addr_a = AW'(c.in0_addr + o_cnt * c.in0_size + t_cnt);
      rd_addr_b = AW'(c.in1_addr + t_cnt);
    end else begin
      rd_addr_a = AW'(c.in0_addr + t_cnt);
      rd_addr_b = AW'(c.in1_addr + t_cnt);
    end
    mm_col     = j_cnt;
    mm_first   = (t_cnt == 32'd0);
    mm_last    = (t_cnt == c.in0_size - 32'd1) && (j_cnt == '1);
    last_issue = is_mm ? (mm_last && (o_cnt == c.out_size - 32'd1))
                       : (t_cnt == c.out_size - 32'd1);
    wr_en      = busy && out_valid;
    wr_addr    = AW'(c.out_addr + w_cnt);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c <= '0; busy <= 1'b0; done <= 1'b0; issuing <= 1'b0;
      o_cnt <= '0; t_cnt <= '0; w_cnt <= '0; j_cnt <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          c       <= cfg;
          o_cnt   <= '0; t_cnt <= '0; w_cnt <= '0; j_cnt <= '0;
          busy    <= (cfg.out_size != 32'd0);
          issuing <= (cfg.out_size != 32'd0) &&
                     !(((cfg.opcode == OP_LIN) || (cfg.opcode == OP_CONV)) && cfg.in0_size == 32'd0);
          done    <= (cfg.out_size == 32'd0);
        end
      end else begin
        if (fire) begin
          if (last_issue) issuing <= 1'b0;
          if (is_mm) begin
            j_cnt <= j_cnt + 1'b1;
            if (j_cnt == '1) begin
              if (t_cnt == c.in0_size - 32'd1) begin
                t_cnt <= '0;
                o_cnt <= o_cnt + 32'd1;
              end else begin
                t_cnt <= t_cnt + 32'd1;
              end
            end
          end else begin
            t_cnt <= t_cnt + 32'd1;
          end
        end
        if (wr_en) begin
          w_cnt <= w_cnt + 32'd1;
          if (w_cnt == c.out_size - 32'd1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
        // A LIN with K = 0 has nothing to issue; it ends without writing.
        if (!issuing && is_mm && c.in0_size == 32'd0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
