// inst_fetch: instruction fetch unit.
//
// After `start` it reads prog_len 64-bit instructions from global memory, one instruction per
// word address from prog_base on, and pushes them into the instruction buffer in order. It only
// requests as many instructions as the buffer has free entries for, counting the requests whose
// data are still on the way, so the buffer never overflows. `fetch_done` rises when all
// instructions have been pushed. The accelerator only says that this unit fetches instructions
// from global memory into the instruction buffer; the program length register, the handshake
// and the flow control are this design's choices.
//
// Memory port: request valid/ready with a word address, in-order response valid with data.
module inst_fetch #(
  parameter int unsigned BUF_DEPTH = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] prog_base,
  input  logic [31:0] prog_len,
  output logic        fetch_done,
  // instruction memory
  output logic        imem_req_valid,
  input  logic        imem_req_ready,
  output logic [31:0] imem_req_addr,
  input  logic        imem_rsp_valid,
  input  logic [63:0] imem_rsp_data,
  // instruction buffer
  output logic        push,
  output logic [63:0] push_data,
  input  logic [$clog2(BUF_DEPTH+1)-1:0] buf_count
);

  localparam int unsigned CW = $clog2(BUF_DEPTH+1);

  logic        active;
  logic [31:0] base, len, n_req, n_rsp;
  logic [CW:0] in_flight;
  logic        space;

  assign in_flight      = (CW+1)'(n_req - n_rsp);
  assign space          = ({1'b0, buf_count} + in_flight) < (CW+1)'(BUF_DEPTH);
  assign imem_req_valid = active && (n_req < len) && space;
  assign imem_req_addr  = base + n_req;
  assign push           = active && imem_rsp_valid;
  assign push_data      = imem_rsp_data;
  assign fetch_done     = !active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; base <= '0; len <= '0; n_req <= '0; n_rsp <= '0;
    end else if (!active) begin
      if (start) begin
        active <= (prog_len != 32'd0);
        base   <= prog_base;
        len    <= prog_len;
        n_req  <= '0;
        n_rsp  <= '0;
      end
    end else begin
      if (imem_req_valid && imem_req_ready) n_req <= n_req + 32'd1;
      if (imem_rsp_valid) begin
        n_rsp <= n_rsp + 32'd1;
        if (n_rsp == len - 32'd1) active <= 1'b0;
      end
    end
  end

endmodule
