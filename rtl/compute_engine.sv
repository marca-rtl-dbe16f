// compute_engine: the control unit and NUM_RCU reconfigurable computing units.
//
// RCU r works on bank r of the on-chip buffer: it receives bank r's rows from read ports A and B
// and its result goes to bank r through the write port. All RCUs share one configuration and
// advance together under the control unit, so one instruction processes NUM_RCU tiles per step.
// For the immediate form of EWM/EWA the second operand is a tile filled with the constant c0.
// 32 RCUs of 16x16 RPEs is the accelerator's configuration; the one-bank-per-RCU pairing is
// this design's choice.
//
// Interface: start/cfg/done towards the configure unit, tile-wide buffer ports. Timing as in
// ce_control_unit and rcu.
module compute_engine
  import marca_pkg::*;
#(
  parameter int unsigned NUM_RCU = 32,
  parameter int unsigned AW      = 10
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  cfg_t       cfg,
  output logic       busy,
  output logic       done,
  output logic [AW-1:0]         rd_addr_a,
  input  tile_t [NUM_RCU-1:0]   rd_data_a,
  output logic [AW-1:0]         rd_addr_b,
  input  tile_t [NUM_RCU-1:0]   rd_data_b,
  output logic [NUM_RCU-1:0]    wr_en,
  output logic [AW-1:0]         wr_addr,
  output tile_t [NUM_RCU-1:0]   wr_data
);

  rcu_mode_e mode;
  rpe_op_e   ew_op;
  logic      b_const, in_valid, mm_first, mm_last, wr;
  logic [$clog2(PE_DIM)-1:0] mm_col;
  logic [NUM_RCU-1:0] ready, valid;
  tile_t     const_tile;
  fp32_t     cfg_c0, cfg_c1, cfg_c2;

  ce_control_unit #(.DIM(PE_DIM), .AW(AW)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .rd_addr_a, .rd_addr_b, .wr_en(wr), .wr_addr,
    .mode, .ew_op, .b_const, .in_valid, .in_ready(&ready),
    .mm_col, .mm_first, .mm_last, .out_valid(&valid)
  );

  always_comb begin
    for (int i = 0; i < PE_DIM; i++)
      for (int k = 0; k < PE_DIM; k++)
        const_tile[i][k] = cfg_c0;
  end

  // c0..c2 are held by the control unit for the whole instruction.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_c0 <= FP_ZERO; cfg_c1 <= FP_ZERO; cfg_c2 <= FP_ZERO;
    end else if (start && !busy) begin
      cfg_c0 <= cfg.c0; cfg_c1 <= cfg.c1; cfg_c2 <= cfg.c2;
    end
  end

  for (genvar r = 0; r < NUM_RCU; r++) begin : g_rcu
    rcu #(.DIM(PE_DIM)) u_rcu (
      .clk, .rst_n,
      .mode, .ew_op,
      .in_valid,
      .in_ready (ready[r]),
      .a        (rd_data_a[r]),
      .b        (b_const ? const_tile : rd_data_b[r]),
      .c0       (cfg_c0),
      .c1       (cfg_c1),
      .c2       (cfg_c2),
      .mm_col, .mm_first, .mm_last,
      .out_valid(valid[r]),
      .out      (wr_data[r])
    );
  end

  assign wr_en = {NUM_RCU{wr}};

endmodule
