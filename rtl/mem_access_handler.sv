// mem_access_handler: executes LOAD and STORE between global memory and the on-chip buffer.
//
// LOAD  moves size = V_size tiles from global memory, word address gm = Src_base + Src_offset,
//       into the buffer from row Dest_addr on. Tile g lands in bank g % NUM_BANKS, row
//       Dest_addr + g / NUM_BANKS, so consecutive tiles of a tensor are spread over the RCUs.
// STORE moves the same tiles the other way.
// A tile is 256 words, moved as 256 / GM_WORDS beats of GM_WORDS words; GM_WORDS = 64 (2048 bits
// per cycle) matches 256 GB/s of off-chip bandwidth at the 1 GHz clock.
// The instruction fields follow the accelerator's ISA; the striping, the beat size and the
// memory handshake are this design's choices.
//
// Global memory port: a request (valid/ready, write enable, word address, write data) and an
// in-order read response (valid, data). Reads of one tile are all issued before its data are
// written to the buffer; one tile is handled at a time.
module mem_access_handler
  import marca_pkg::*;
#(
  parameter int unsigned NUM_BANKS = 32,
  parameter int unsigned AW        = 10,
  parameter int unsigned GM_WORDS  = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  cfg_t        cfg,
  output logic        busy,
  output logic        done,
  // global memory
  output logic        gm_req_valid,
  input  logic        gm_req_ready,
  output logic        gm_req_we,
  output logic [31:0] gm_req_addr,
  output logic [GM_WORDS*32-1:0] gm_req_wdata,
  input  logic        gm_rsp_valid,
  input  logic [GM_WORDS*32-1:0] gm_rsp_rdata,
  // on-chip buffer
  output logic [AW-1:0]          rd_addr,
  input  tile_t [NUM_BANKS-1:0]  rd_data,
  output logic [NUM_BANKS-1:0]   wr_en,
  output logic [AW-1:0]          wr_addr,
  output tile_t                  wr_data
);

  localparam int unsigned BEATS = TILE_WORDS / GM_WORDS;
  localparam int unsigned BW    = $clog2(BEATS + 1);

  typedef enum logic [1:0] {S_IDLE, S_XFER, S_WRITE} state_e;
  state_e state;

  logic        store;
  logic [31:0] size, g, base, row0;
  logic [BW-1:0] issued, received;
  logic [TILE_BITS-1:0] tile_q;
  logic [31:0] bank, row;
  logic [TILE_BITS-1:0] src_bits;

  assign bank    = g % NUM_BANKS;
  assign row     = row0 + g / NUM_BANKS;
  assign rd_addr = AW'(row);
  assign wr_addr = AW'(row);
  assign wr_data = tile_q;
  assign busy    = (state != S_IDLE);

  assign src_bits     = rd_data[bank[$clog2(NUM_BANKS)-1:0]];
  assign gm_req_valid = (state == S_XFER) && (issued < BW'(BEATS));
  assign gm_req_we    = store;
  assign gm_req_addr  = base + g * TILE_WORDS + 32'(issued) * GM_WORDS;
  assign gm_req_wdata = src_bits[32'(issued) * GM_WORDS * 32 +: GM_WORDS * 32];

  always_comb begin
    wr_en = '0;
    if (state == S_WRITE) wr_en[bank[$clog2(NUM_BANKS)-1:0]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; store <= 1'b0;
      size <= '0; g <= '0; base <= '0; row0 <= '0;
      issued <= '0; received <= '0; tile_q <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          store    <= (cfg.opcode == OP_STORE);
          size     <= cfg.out_size;
          base     <= cfg.gm_addr;
          row0     <= cfg.out_addr;
          g        <= '0;
          issued   <= '0;
          received <= '0;
          if (cfg.out_size == 32'd0) done <= 1'b1;
          else                       state <= S_XFER;
        end
        S_XFER: begin
          if (gm_req_valid && gm_req_ready) issued <= issued + 1'b1;
          if (gm_rsp_valid && !store) begin
            tile_q[32'(received) * GM_WORDS * 32 +: GM_WORDS * 32] <= gm_rsp_rdata;
            received <= received + 1'b1;
          end
          if (store) begin
            if (gm_req_valid && gm_req_ready && issued == BW'(BEATS - 1)) begin
              issued <= '0;
              g      <= g + 32'd1;
              if (g == size - 32'd1) begin state <= S_IDLE; done <= 1'b1; end
            end
          end else if (gm_rsp_valid && received == BW'(BEATS - 1)) begin
            state <= S_WRITE;
          end
        end
        S_WRITE: begin
          issued   <= '0;
          received <= '0;
          g        <= g + 32'd1;
          if (g == size - 32'd1) begin state <= S_IDLE; done <= 1'b1; end
          else                     state <= S_XFER;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A read response only arrives for a request that was made.
  assert property (@(posedge clk) disable iff (!rst_n) gm_rsp_valid |-> (state == S_XFER && !store))
    else $error("unexpected global memory response");

endmodule
