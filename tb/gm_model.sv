// gm_model: behavioural model of the off-chip global memory (HBM) for the testbenches; not part
// of the design.
//
// Two ports, as the accelerator's top exposes them: an instruction port of 64-bit words and a
// data port of GM_WORDS 32-bit words per beat. Both accept a request every cycle and answer a
// read one cycle later, in order. Word addresses; the data port's beat at address A covers words
// A .. A+GM_WORDS-1. Testbenches fill `imem` and `mem` directly by hierarchical reference.
module gm_model #(
  parameter int unsigned GM_WORDS = 64,
  parameter int unsigned WORDS    = 65536,
  parameter int unsigned INSTS    = 256
) (
  input  logic        clk,
  input  logic        imem_req_valid,
  output logic        imem_req_ready,
  input  logic [31:0] imem_req_addr,
  output logic        imem_rsp_valid,
  output logic [63:0] imem_rsp_data,
  input  logic        gm_req_valid,
  output logic        gm_req_ready,
  input  logic        gm_req_we,
  input  logic [31:0] gm_req_addr,
  input  logic [GM_WORDS*32-1:0] gm_req_wdata,
  output logic        gm_rsp_valid,
  output logic [GM_WORDS*32-1:0] gm_rsp_rdata
);
  logic [63:0] imem [INSTS];
  logic [31:0] mem  [WORDS];
  int unsigned reads = 0, writes = 0;

  assign imem_req_ready = 1'b1;
  assign gm_req_ready   = 1'b1;

  initial begin
    imem_rsp_valid = 0; gm_rsp_valid = 0; imem_rsp_data = '0; gm_rsp_rdata = '0;
    foreach (imem[i]) imem[i] = '0;
    foreach (mem[i]) mem[i] = '0;
  end

  always @(posedge clk) begin
    imem_rsp_valid <= imem_req_valid;
    if (imem_req_valid) imem_rsp_data <= imem[imem_req_addr % INSTS];
    gm_rsp_valid <= gm_req_valid && !gm_req_we;
    if (gm_req_valid) begin
      for (int w = 0; w < int'(GM_WORDS); w++) begin
        if (gm_req_we) mem[(gm_req_addr + w) % WORDS] <= gm_req_wdata[w*32 +: 32];
        else           gm_rsp_rdata[w*32 +: 32] <= mem[(gm_req_addr + w) % WORDS];
      end
      if (gm_req_we) writes++; else reads++;
    end
  end
endmodule
