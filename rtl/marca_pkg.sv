// marca_pkg: types and constants shared by the MARCA accelerator RTL.
//
// Data are IEEE-754 single-precision words (fp32_t). Instructions are 64 bits wide with a 4-bit
// opcode followed by 4-bit register indices, MSB first, in the field order of the ISA table
// (opcode, Reg0, Reg1, Reg2, Reg3/CReg3/immediate, Reg4/CReg4, Reg5/CReg5, unused). The field
// widths and their order follow the ISA of the accelerator; the opcode values, the placement of
// fields from the MSB and the flag that selects the immediate form of EWM/EWA are this design's
// own choices.
//
// On-chip data are organised in tiles of 16x16 words, the operand size of one reconfigurable
// computing unit (RCU). The on-chip buffer has one bank per RCU; a buffer address names one tile
// row of every bank at once, and tensors are striped across banks, tile g in bank g % NUM_RCU.
package marca_pkg;

  localparam int unsigned PE_DIM     = 16;               // RPE array is PE_DIM x PE_DIM
  localparam int unsigned TILE_WORDS = PE_DIM * PE_DIM;  // words in one tile
  localparam int unsigned TILE_BITS  = TILE_WORDS * 32;

  typedef logic [31:0] fp32_t;
  typedef fp32_t [PE_DIM-1:0][PE_DIM-1:0] tile_t;        // [row][col]
  typedef fp32_t [PE_DIM-1:0] vec_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam fp32_t FP_ONE  = 32'h3F80_0000;

  // Opcodes (values are this design's choice; the ISA lists the mnemonics only).
  typedef enum logic [3:0] {
    OP_LIN   = 4'd0,
    OP_CONV  = 4'd1,
    OP_NORM  = 4'd2,
    OP_EWM   = 4'd3,
    OP_EWA   = 4'd4,
    OP_EXP   = 4'd5,
    OP_SILU  = 4'd6,
    OP_LOAD  = 4'd7,
    OP_STORE = 4'd8
  } opcode_e;

  // Raw 64-bit instruction, register-field view.
  typedef struct packed {
    logic [3:0]  opcode;
    logic [3:0]  r0;
    logic [3:0]  r1;
    logic [3:0]  r2;
    logic [3:0]  r3;
    logic [3:0]  r4;
    logic [3:0]  r5;
    logic [35:0] rsvd;
  } inst_t;

  // Bit 0 of an EWM/EWA instruction selects its immediate form (In1 is a 32-bit constant in
  // bits [47:16] instead of a register index in bits [47:44]).
  localparam int unsigned IMM_FLAG_BIT = 0;

  // Which unit executes an instruction.
  typedef enum logic [1:0] {
    UNIT_CE  = 2'd0,   // compute engine
    UNIT_NU  = 2'd1,   // normalization unit
    UNIT_MAH = 2'd2    // memory access handler
  } unit_e;

  // RCU configurations.
  typedef enum logic [1:0] {
    MODE_MM   = 2'd0,
    MODE_EW   = 2'd1,
    MODE_EXP  = 2'd2,
    MODE_SILU = 2'd3
  } rcu_mode_e;

  // Operation of one RPE.
  typedef enum logic [1:0] {
    RPE_MUL  = 2'd0,   // a * b          (EWM, and the products of MM)
    RPE_ADD  = 2'd1,   // a + b          (EWA)
    RPE_EXP  = 2'd2,   // fast biased exp with constants c0, c1, c2
    RPE_SILU = 2'd3    // piecewise SiLU
  } rpe_op_e;

  // Decoded configuration passed from the configure unit to the executing unit.
  typedef struct packed {
    opcode_e     opcode;
    logic [31:0] out_addr;
    logic [31:0] out_size;
    logic [31:0] in0_addr;
    logic [31:0] in0_size;
    logic [31:0] in1_addr;
    logic [31:0] in1_size;
    fp32_t       c0;        // EXP: a; EWM/EWA immediate form: the constant
    fp32_t       c1;        // EXP: b
    fp32_t       c2;        // EXP: c
    logic        imm;       // EWM/EWA with a constant second operand
    logic [31:0] gm_addr;   // LOAD/STORE: Src_base + Src_offset
  } cfg_t;

  // Piecewise SiLU (four segments). Breakpoints and the segment coefficients follow the
  // accelerator's approximation; the quadratic 0.232(x+1.181)^2-0.275 is evaluated in Horner
  // form as (0.232*x + 0.547984)*x + 0.0485846 so that it takes two multiply-add passes.
  localparam fp32_t SILU_X0      = 32'hC0A0_0000;  // -5.0
  localparam fp32_t SILU_X1      = 32'hBFC0_0000;  // -1.5
  localparam fp32_t SILU_X2      = 32'h3F40_0000;  //  0.75
  localparam fp32_t SILU_CONST   = 32'hBC5D_2F1B;  // -0.0135
  localparam fp32_t SILU_L1_K    = 32'hBD7F_C116;  // -0.06244
  localparam fp32_t SILU_L1_B    = 32'hBEB0_FF97;  // -0.3457
  localparam fp32_t SILU_Q_A     = 32'h3E6D_9168;  //  0.232
  localparam fp32_t SILU_Q_B     = 32'h3F0C_48AE;  //  0.547984  = 2*0.232*1.181
  localparam fp32_t SILU_Q_C     = 32'h3D47_0098;  //  0.0485846 = 0.232*1.181^2-0.275
  localparam fp32_t SILU_L2_K    = 32'h3F86_6666;  //  1.05
  localparam fp32_t SILU_L2_B    = 32'hBE8E_6320;  // -0.2781

  function automatic unit_e unit_of(opcode_e op);
    case (op)
      OP_NORM:           return UNIT_NU;
      OP_LOAD, OP_STORE: return UNIT_MAH;
      default:           return UNIT_CE;
    endcase
  endfunction

endpackage
