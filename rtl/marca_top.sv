// marca_top: the MARCA Mamba accelerator.
//
// Four parts, connected as in the accelerator's block diagram:
//   instruction processing  inst_fetch -> inst_buffer -> inst_decode (Regs, CRegs) -> configure_unit
//   normalization unit      norm_unit (NORM)
//   on-chip buffer          onchip_buffer, filled and drained by mem_access_handler (LOAD, STORE)
//   compute engine          compute_engine: control unit + NUM_RCU RCUs of 16x16 RPEs
//                           (LIN, CONV, EWM, EWA, EXP, SILU)
// Instructions run one at a time; the configure unit hands the buffer's ports to the unit that
// executes the current instruction. Global memory (HBM) is outside: its instruction read port
// and its data port are ports of this module. The 16 Regs and 16 CRegs are written by the host
// through reg_we/creg_we before `start`; `start` fetches and runs prog_len instructions from
// word address prog_base, and `done` is high once they have all completed.
// The part list, 32 RCUs, 16x16 RPEs, the 24 MB buffer and the 64-bit ISA with 16+16 registers
// are the accelerator's; the port-sharing scheme, the host register port and the memory
// handshakes are this design's choices.
module marca_top
  import marca_pkg::*;
#(
  parameter int unsigned NUM_RCU    = 32,
  parameter int unsigned BUF_DEPTH  = 768,
  parameter int unsigned AW         = 10,
  parameter int unsigned GM_WORDS   = 64,
  parameter int unsigned IBUF_DEPTH = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] prog_base,
  input  logic [31:0] prog_len,
  output logic        done,
  // host access to the register files
  input  logic        reg_we,
  input  logic        creg_we,
  input  logic [3:0]  reg_idx,
  input  logic [31:0] reg_wdata,
  // global memory, instruction read port
  output logic        imem_req_valid,
  input  logic        imem_req_ready,
  output logic [31:0] imem_req_addr,
  input  logic        imem_rsp_valid,
  input  logic [63:0] imem_rsp_data,
  // global memory, data port
  output logic        gm_req_valid,
  input  logic        gm_req_ready,
  output logic        gm_req_we,
  output logic [31:0] gm_req_addr,
  output logic [GM_WORDS*32-1:0] gm_req_wdata,
  input  logic        gm_rsp_valid,
  input  logic [GM_WORDS*32-1:0] gm_rsp_rdata
);

  // ---------------- instruction processing ----------------
  logic        ib_push, ib_pop, ib_empty, ib_full;
  logic [63:0] ib_wdata, ib_rdata;
  logic [$clog2(IBUF_DEPTH+1)-1:0] ib_count;
  logic        fetch_done;

  inst_fetch #(.BUF_DEPTH(IBUF_DEPTH)) u_fetch (
    .clk, .rst_n, .start, .prog_base, .prog_len, .fetch_done,
    .imem_req_valid, .imem_req_ready, .imem_req_addr, .imem_rsp_valid, .imem_rsp_data,
    .push(ib_push), .push_data(ib_wdata), .buf_count(ib_count)
  );

  inst_buffer #(.DEPTH(IBUF_DEPTH)) u_ibuf (
    .clk, .rst_n, .push(ib_push), .wr_data(ib_wdata), .pop(ib_pop), .rd_data(ib_rdata),
    .empty(ib_empty), .full(ib_full), .count(ib_count)
  );

  logic  dec_valid, dec_ready;
  cfg_t  dec_cfg, cfg;
  unit_e active;
  logic  start_ce, start_nu, start_mah, done_ce, done_nu, done_mah, prog_done;

  inst_decode u_dec (
    .clk, .rst_n, .reg_we, .creg_we, .reg_idx, .reg_wdata,
    .inst(ib_rdata), .inst_valid(!ib_empty), .inst_pop(ib_pop),
    .cfg_valid(dec_valid), .cfg_ready(dec_ready), .cfg(dec_cfg)
  );

  configure_unit u_cfg (
    .clk, .rst_n, .start, .prog_len, .prog_done,
    .cfg_valid(dec_valid), .cfg_ready(dec_ready), .cfg(dec_cfg), .cfg_out(cfg), .active,
    .start_ce, .start_nu, .start_mah, .done_ce, .done_nu, .done_mah
  );

  assign done = prog_done && fetch_done;

  // ---------------- on-chip buffer ----------------
  logic [AW-1:0]          rd_addr_a, rd_addr_b, wr_addr;
  tile_t [NUM_RCU-1:0]    rd_data_a, rd_data_b, wr_data;
  logic [NUM_RCU-1:0]     wr_en;

  onchip_buffer #(.NUM_BANKS(NUM_RCU), .DEPTH(BUF_DEPTH), .AW(AW)) u_buf (
    .clk, .rd_addr_a, .rd_data_a, .rd_addr_b, .rd_data_b, .wr_en, .wr_addr, .wr_data
  );

  // ---------------- compute engine ----------------
  logic [AW-1:0]       ce_rd_a, ce_rd_b, ce_wr_addr;
  logic [NUM_RCU-1:0]  ce_wr_en;
  tile_t [NUM_RCU-1:0] ce_wr_data;
  logic                ce_busy;

  compute_engine #(.NUM_RCU(NUM_RCU), .AW(AW)) u_ce (
    .clk, .rst_n, .start(start_ce), .cfg, .busy(ce_busy), .done(done_ce),
    .rd_addr_a(ce_rd_a), .rd_data_a, .rd_addr_b(ce_rd_b), .rd_data_b,
    .wr_en(ce_wr_en), .wr_addr(ce_wr_addr), .wr_data(ce_wr_data)
  );

  // ---------------- normalization unit ----------------
  logic [AW-1:0] nu_rd, nu_wr_addr;
  logic          nu_wr_en, nu_busy;
  tile_t         nu_wr_data;

  norm_unit #(.AW(AW)) u_nu (
    .clk, .rst_n, .start(start_nu), .cfg, .busy(nu_busy), .done(done_nu),
    .rd_addr(nu_rd), .rd_data(rd_data_a[0]),
    .wr_en(nu_wr_en), .wr_addr(nu_wr_addr), .wr_data(nu_wr_data)
  );

  // ---------------- memory access handler ----------------
  logic [AW-1:0]      mah_rd, mah_wr_addr;
  logic [NUM_RCU-1:0] mah_wr_en;
  tile_t              mah_wr_data;
  logic               mah_busy;

  mem_access_handler #(.NUM_BANKS(NUM_RCU), .AW(AW), .GM_WORDS(GM_WORDS)) u_mah (
    .clk, .rst_n, .start(start_mah), .cfg, .busy(mah_busy), .done(done_mah),
    .gm_req_valid, .gm_req_ready, .gm_req_we, .gm_req_addr, .gm_req_wdata,
    .gm_rsp_valid, .gm_rsp_rdata,
    .rd_addr(mah_rd), .rd_data(rd_data_a),
    .wr_en(mah_wr_en), .wr_addr(mah_wr_addr), .wr_data(mah_wr_data)
  );

  // ---------------- buffer port ownership ----------------
  always_comb begin
    rd_addr_b = ce_rd_b;
    unique case (active)
      UNIT_NU: begin
        rd_addr_a = nu_rd;
        wr_addr   = nu_wr_addr;
        wr_en     = NUM_RCU'(nu_wr_en);          // bank 0 only
        for (int r = 0; r < NUM_RCU; r++) wr_data[r] = nu_wr_data;
      end
      UNIT_MAH: begin
        rd_addr_a = mah_rd;
        wr_addr   = mah_wr_addr;
        wr_en     = mah_wr_en;
        for (int r = 0; r < NUM_RCU; r++) wr_data[r] = mah_wr_data;
      end
      default: begin
        rd_addr_a = ce_rd_a;
        wr_addr   = ce_wr_addr;
        wr_en     = ce_wr_en;
        wr_data   = ce_wr_data;
      end
    endcase
  end

  // At most one unit is working at any time.
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0({ce_busy, nu_busy, mah_busy}))
    else $error("two units active at once");

endmodule
