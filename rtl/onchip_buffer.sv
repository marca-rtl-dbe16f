// onchip_buffer: the accelerator's 24 MB on-chip buffer pool.
//
// The pool is split into NUM_BANKS banks, one per RCU, of DEPTH rows; a row holds one 16x16 tile
// of 32-bit words (1 KB). 32 banks x 768 rows x 1 KB = 24 MB, the capacity the accelerator
// specifies. All banks share the row addresses of two read ports (A and B, the two operands of
// an RCU) and of one write port whose enable is per bank, so the compute engine reads and writes
// one row of every bank per cycle, while the memory access handler and the normalization unit
// write single banks.
//
// How the pool is used, as an input buffer for linear operations (operands loaded once and shared
// within the operation) or as an output buffer for element-wise operations (results kept for the
// next operation), is decided by where the program places its tensors; the array itself is the
// same in both cases.
//
// The accelerator builds the pool from eDRAM; that macro is modelled here as an array with
// combinational reads and a synchronous write, this design's choice, as are the bank split, the
// tile-wide rows and the port count. A write and a read of the same row in one cycle read the old
// data. Out-of-range reads return zero and out-of-range writes are dropped.
module onchip_buffer
  import marca_pkg::*;
#(
  parameter int unsigned NUM_BANKS = 32,
  parameter int unsigned DEPTH     = 768,
  parameter int unsigned AW        = 10
) (
  input  logic                        clk,
  input  logic [AW-1:0]               rd_addr_a,
  output tile_t [NUM_BANKS-1:0]       rd_data_a,
  input  logic [AW-1:0]               rd_addr_b,
  output tile_t [NUM_BANKS-1:0]       rd_data_b,
  input  logic [NUM_BANKS-1:0]        wr_en,
  input  logic [AW-1:0]               wr_addr,
  input  tile_t [NUM_BANKS-1:0]       wr_data
);

  for (genvar bk = 0; bk < NUM_BANKS; bk++) begin : g_bank
    tile_t mem [DEPTH];

    always_ff @(posedge clk) begin
      if (wr_en[bk] && 32'(wr_addr) < DEPTH) mem[wr_addr] <= wr_data[bk];
    end

    assign rd_data_a[bk] = (32'(rd_addr_a) < DEPTH) ? mem[rd_addr_a] : '0;
    assign rd_data_b[bk] = (32'(rd_addr_b) < DEPTH) ? mem[rd_addr_b] : '0;
  end

endmodule
