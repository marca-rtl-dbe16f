// configure_unit: passes each decoded instruction to the unit that executes it.
//
// When idle it takes a configuration from the decode unit, holds it on `cfg_out`, pulses the
// start of the compute engine (LIN, CONV, EWM, EWA, EXP, SILU), the normalization unit (NORM) or
// the memory access handler (LOAD, STORE), and waits for that unit's done before it takes the
// next instruction, so instructions run one after another. `active` tells the on-chip buffer
// which unit owns its ports. It counts executed instructions; `prog_done` rises when prog_len of
// them have finished after `start`. The accelerator says only that configuration information is
// passed through this unit to the following modules and that the next instruction is decoded
// when the compute engine has finished; the one-at-a-time issue and the counting are this
// design's choices.
module configure_unit
  import marca_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] prog_len,
  output logic        prog_done,
  input  logic        cfg_valid,
  output logic        cfg_ready,
  input  cfg_t        cfg,
  output cfg_t        cfg_out,
  output unit_e       active,
  output logic        start_ce,
  output logic        start_nu,
  output logic        start_mah,
  input  logic        done_ce,
  input  logic        done_nu,
  input  logic        done_mah
);

  logic        running, waiting;
  logic [31:0] len, executed;
  logic        unit_done;

  assign cfg_ready = running && !waiting && !prog_done;
  assign unit_done = (active == UNIT_CE  && done_ce) ||
                     (active == UNIT_NU  && done_nu) ||
                     (active == UNIT_MAH && done_mah);
  assign prog_done = running && (executed == len);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; waiting <= 1'b0; len <= '0; executed <= '0;
      cfg_out <= '0; active <= UNIT_CE;
      start_ce <= 1'b0; start_nu <= 1'b0; start_mah <= 1'b0;
    end else begin
      start_ce <= 1'b0; start_nu <= 1'b0; start_mah <= 1'b0;
      if (start) begin
        running  <= 1'b1;
        waiting  <= 1'b0;
        len      <= prog_len;
        executed <= '0;
      end else if (cfg_valid && cfg_ready) begin
        cfg_out <= cfg;
        active  <= unit_of(cfg.opcode);
        waiting <= 1'b1;
        unique case (unit_of(cfg.opcode))
          UNIT_NU:  start_nu  <= 1'b1;
          UNIT_MAH: start_mah <= 1'b1;
          default:  start_ce  <= 1'b1;
        endcase
      end else if (waiting && unit_done) begin
        waiting  <= 1'b0;
        executed <= executed + 32'd1;
      end
    end
  end

endmodule
