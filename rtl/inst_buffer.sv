// inst_buffer: instruction buffer, a FIFO of 64-bit instructions between the instruction fetch
// and the instruction decode units.
//
// Circular buffer with read and write pointers and an occupancy count; a push into a full buffer
// and a pop from an empty one are ignored (and flagged by assertions). The head is visible
// combinationally on rd_data. The accelerator names the instruction buffer; its depth (32) and
// organisation are this design's choices.
module inst_buffer #(
  parameter int unsigned DEPTH = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        push,
  input  logic [63:0] wr_data,
  input  logic        pop,
  output logic [63:0] rd_data,
  output logic        empty,
  output logic        full,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned PW = $clog2(DEPTH);

  logic [63:0]   mem [DEPTH];
  logic [PW-1:0] wp, rp;

  assign empty   = (count == '0);
  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign rd_data = mem[rp];

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push && !full) wp <= (wp == PW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop && !empty) rp <= (rp == PW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (($clog2(DEPTH+1))'(push && !full)) - (($clog2(DEPTH+1))'(pop && !empty));
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $error("push into full instruction buffer");
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("pop from empty instruction buffer");

endmodule
