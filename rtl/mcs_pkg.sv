// mcs_pkg: types and constants shared by the MIPS core, the fault detection
// logic (FDL) and the One Instruction Core (OIC) of the MCS-OIC system.
//
// It holds the MIPS opcode/funct encodings of the implemented instruction
// subset (standard MIPS-I encodings), the six functions an OIC can emulate
// (ADD, MOV, INC, DEC, SUB, DIV, the function set the reliability study uses)
// and the OIC control word format. The control word format, the register
// names Z, W, R and the operand constants are choices of this design; the
// paper names only the X and Y registers, the OIC PC and the control word
// register.
package mcs_pkg;

  localparam int unsigned XLEN = 32;        // MIPS and OIC data width
  localparam int unsigned OW   = XLEN + 1;  // OIC internal width: one guard bit

  // ---------------------------------------------------------------- MIPS ISA
  typedef enum logic [5:0] {
    OP_RTYPE = 6'h00,
    OP_REGIMM = 6'h01,
    OP_J     = 6'h02,
    OP_JAL   = 6'h03,
    OP_BEQ   = 6'h04,
    OP_BNE   = 6'h05,
    OP_BLEZ  = 6'h06,
    OP_BGTZ  = 6'h07,
    OP_ADDI  = 6'h08,
    OP_ADDIU = 6'h09,
    OP_SLTI  = 6'h0A,
    OP_SLTIU = 6'h0B,
    OP_ANDI  = 6'h0C,
    OP_ORI   = 6'h0D,
    OP_XORI  = 6'h0E,
    OP_LUI   = 6'h0F,
    OP_LB    = 6'h20,
    OP_LH    = 6'h21,
    OP_LW    = 6'h23,
    OP_LBU   = 6'h24,
    OP_LHU   = 6'h25,
    OP_SB    = 6'h28,
    OP_SH    = 6'h29,
    OP_SW    = 6'h2B
  } opcode_e;

  typedef enum logic [5:0] {
    FN_SLL  = 6'h00,
    FN_SRL  = 6'h02,
    FN_SRA  = 6'h03,
    FN_SLLV = 6'h04,
    FN_SRLV = 6'h06,
    FN_SRAV = 6'h07,
    FN_JR   = 6'h08,
    FN_JALR = 6'h09,
    FN_MFHI = 6'h10,
    FN_MTHI = 6'h11,
    FN_MFLO = 6'h12,
    FN_MTLO = 6'h13,
    FN_MULT = 6'h18,
    FN_MULTU = 6'h19,
    FN_DIVU = 6'h1B,
    FN_ADD  = 6'h20,
    FN_ADDU = 6'h21,
    FN_SUB  = 6'h22,
    FN_SUBU = 6'h23,
    FN_AND  = 6'h24,
    FN_OR   = 6'h25,
    FN_XOR  = 6'h26,
    FN_NOR  = 6'h27,
    FN_SLT  = 6'h2A,
    FN_SLTU = 6'h2B
  } funct_e;

  // Operation carried by ID/EX into the ALU and the FDL.
  typedef enum logic [4:0] {
    ALU_ADD, ALU_SUB, ALU_AND, ALU_OR, ALU_XOR, ALU_NOR, ALU_SLT, ALU_LUI,
    ALU_DIVU, ALU_MFHI, ALU_MFLO, ALU_SLTU, ALU_SLL, ALU_SRL, ALU_SRA,
    ALU_MULT, ALU_MULTU, ALU_MTHI, ALU_MTLO
  } alu_op_e;

  // ---------------------------------------------------------- OIC functions
  typedef enum logic [2:0] {
    F_ADD = 3'd0,
    F_MOV = 3'd1,
    F_INC = 3'd2,
    F_DEC = 3'd3,
    F_SUB = 3'd4,
    F_DIV = 3'd5
  } oic_func_e;

  // ------------------------------------------------------ OIC control word
  // Operand sources of the subtractor input multiplexers.
  typedef enum logic [2:0] {
    S_X = 3'd0, S_Y = 3'd1, S_Z = 3'd2, S_W = 3'd3, S_R = 3'd4,
    S_ZERO = 3'd5, S_ONE = 3'd6
  } oic_src_e;

  // Destination registers.
  typedef enum logic [2:0] {
    D_X = 3'd0, D_Y = 3'd1, D_Z = 3'd2, D_W = 3'd3, D_R = 3'd4
  } oic_dst_e;

  // One subtract operation: dst <= min - sub (if we).
  typedef struct packed {
    logic     we;
    oic_dst_e dst;
    oic_src_e min;
    oic_src_e sub;
  } oic_op_t;

  localparam int unsigned CW_AW     = 5;   // control word memory address bits
  localparam int unsigned N_LANES   = 3;   // conventional subtractors
  localparam int unsigned N_FUNCS   = 6;   // OIC functions (oic_func_e)

  // The self-checking lane performs the subleq proper: its result decides the
  // branch (<= 0 -> target, else PC+1). The three conventional lanes run in
  // parallel with it. 'last' ends the microprogram after this word.
  typedef struct packed {
    oic_op_t                  sc;
    oic_op_t [N_LANES-1:0]    lane;
    logic    [CW_AW-1:0]      target;
    logic                     last;
  } oic_cw_t;

  // Map a decoded MIPS arithmetic instruction to an OIC function.
  // add/addu/addi/addiu -> ADD, except: immediate +1 -> INC, immediate -1 ->
  // DEC, second operand register $0 or immediate 0 -> MOV.
  function automatic oic_func_e oic_func_of(input alu_op_e op, input logic is_imm,
                                            input logic [15:0] imm, input logic [4:0] rt);
    oic_func_e f;
    unique case (op)
      ALU_SUB:  f = F_SUB;
      ALU_DIVU: f = F_DIV;
      default: begin
        if (is_imm && imm == 16'h0001)      f = F_INC;
        else if (is_imm && imm == 16'hFFFF) f = F_DEC;
        else if (is_imm ? (imm == 16'h0000) : (rt == 5'd0)) f = F_MOV;
        else                                f = F_ADD;
      end
    endcase
    return f;
  endfunction

  // Arithmetic instructions are those the FDL checks and the OIC can emulate.
  function automatic logic is_arith(input alu_op_e op);
    return (op == ALU_ADD) || (op == ALU_SUB) || (op == ALU_DIVU);
  endfunction

endpackage
