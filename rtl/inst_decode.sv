// inst_decode: instruction decode unit with the 16 general-purpose registers (Regs) and the 16
// constant registers (CRegs), all 32 bits wide.
//
// The instruction at the head of the instruction buffer is decoded combinationally into a
// configuration (cfg_t): its 4-bit fields name registers whose contents become addresses, sizes
// and constants, as the ISA lays out per instruction class:
//   LIN/CONV  Reg0..Reg5 = Out_addr, Out_size, In0_addr, In0_size, In1_addr, In1_size
//   EXP/SILU  Reg0..Reg2 = Out_addr, Out_size, In_addr; CReg3..CReg5 = Constant0..2
//   EWM/EWA   Reg0..Reg2 = Out_addr, Out_size, In0_addr; Reg3 = In1_addr, or a 32-bit
//             immediate constant in bits [47:16] when bit 0 is set
//   NORM      Reg0..Reg2 = Out_addr, Out_size, In_addr
//   LOAD/STORE Reg0 = Dest_addr, Reg1 = V_size, Reg2 = Src_base; Immed (32 bits) = Src_offset
// The instruction is popped when the configure unit takes it (cfg_valid && cfg_ready).
// The ISA has no instruction that writes a register, so the registers are written from outside
// through reg_we/creg_we (by the host, before a program runs); this, the bit positions and the
// immediate flag are this design's choices.
module inst_decode
  import marca_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // register write port
  input  logic        reg_we,
  input  logic        creg_we,
  input  logic [3:0]  reg_idx,
  input  logic [31:0] reg_wdata,
  // instruction buffer head
  input  logic [63:0] inst,
  input  logic        inst_valid,
  output logic        inst_pop,
  // to the configure unit
  output logic        cfg_valid,
  input  logic        cfg_ready,
  output cfg_t        cfg
);

  logic [31:0] regs  [16];
  logic [31:0] cregs [16];
  inst_t       f;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 16; i++) begin
        regs[i]  <= '0;
        cregs[i] <= '0;
      end
    end else begin
      if (reg_we)  regs[reg_idx]  <= reg_wdata;
      if (creg_we) cregs[reg_idx] <= reg_wdata;
    end
  end

  assign f         = inst_t'(inst);
  assign cfg_valid = inst_valid;
  assign inst_pop  = inst_valid && cfg_ready;

  always_comb begin
    cfg          = '0;
    cfg.opcode   = opcode_e'(f.opcode);
    cfg.out_addr = regs[f.r0];
    cfg.out_size = regs[f.r1];
    cfg.in0_addr = regs[f.r2];
    unique case (opcode_e'(f.opcode))
      OP_LIN, OP_CONV: begin
        cfg.in0_size = regs[f.r3];
        cfg.in1_addr = regs[f.r4];
        cfg.in1_size = regs[f.r5];
      end
      OP_EXP, OP_SILU: begin
        cfg.c0 = cregs[f.r3];
        cfg.c1 = cregs[f.r4];
        cfg.c2 = cregs[f.r5];
      end
      OP_EWM, OP_EWA: begin
        cfg.imm = inst[IMM_FLAG_BIT];
        if (inst[IMM_FLAG_BIT]) cfg.c0       = inst[47:16];
        else                    cfg.in1_addr = regs[f.r3];
      end
      OP_LOAD, OP_STORE: begin
        cfg.gm_addr = regs[f.r2] + inst[47:16];
      end
      default: ;
    endcase
  end

endmodule
