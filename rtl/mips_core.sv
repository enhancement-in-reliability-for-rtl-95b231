// mips_core: 32-bit five-stage pipelined scalar MIPS core (IF, ID, EXE, MEM,
// WB) with the fault detection logic (FDL) and the hand-over port to a One
// Instruction Core (OIC).
//
// Pipeline: the classic textbook organisation named by the paper. IF/ID holds
// IR and NPC; ID/EX holds A, B, Imm, NPC and the decoded control; EX/MEM
// holds ALUOutput, B and Cond; MEM/WB holds ALUOutput and LMD. Forwarding
// from EX/MEM and MEM/WB into EX, a one-cycle load-use stall, and branches
// and jumps resolved in EX (two younger instructions flushed when taken) are
// this design's choices; the paper does not describe hazard handling.
//
// Fault path (as in the paper): the FDL executes each arithmetic instruction
// concurrently with the ALU and compares. On a mismatch the pipeline stalls,
// the instruction's function (decoded from the IF/ID opcode fields it came
// with) and the operands ID/EX.A and ID/EX.B are sent to the OIC (oic_start
// pulse), and the core waits. When the OIC signals done, its result is
// loaded into MEM/WB.ALUOutput, the instruction leaves EX and the pipeline
// resumes. For divu the OIC quotient and remainder are written to LO and HI
// instead.
//
// Implemented instructions: add addu sub subu and or xor nor slt sltu sll
// srl sra sllv srlv srav mult multu divu mfhi mflo mthi mtlo addi addiu
// slti sltiu andi ori xori lui lb lbu lh lhu lw sb sh sw beq bne blez bgtz
// bltz bgez j jal jr jalr. Byte
// and halfword accesses are little-endian within the word; a store of less
// than a word merges into the word read in the same cycle. No exceptions, no branch delay slot (taken
// branches and jumps flush; jal links PC+4), add/addi do not trap on
// overflow. Anything else executes as a no-op.
//
// Memories: IMEM_WORDS-word instruction memory written through the prog_*
// port (used while rst_n is low or before a program runs), DMEM_WORDS-word
// data memory; both are word-addressed by address bits [.. : 2] and read
// combinationally. dbg_* ports read a register and a data memory word.
//
// alu_fault_mask is XORed into the ALU output of every instruction in EX; it
// models a soft error and exists only to exercise the fault path.
//
// Migration: the paper also names a second use of the OICs, executing on
// them the instructions that have a high failure probability on the
// conventional core. A checked instruction whose OIC function has its bit set
// in migrate is handed over exactly like a faulty one, whether or not the FDL
// found a fault (migrated pulses instead of fault_detected). How the set of
// such functions is chosen is left to whoever drives migrate; tie it to zero
// for hand-over on faults only.
module mips_core
  import mcs_pkg::*;
#(
  parameter int unsigned IMEM_WORDS = 1024,
  parameter int unsigned DMEM_WORDS = 1024
) (
  input  logic            clk,
  input  logic            rst_n,
  // program load
  input  logic            prog_we,
  input  logic [31:0]     prog_addr,    // word index
  input  logic [31:0]     prog_data,
  // soft-error model
  input  logic [XLEN-1:0] alu_fault_mask,
  input  logic [N_FUNCS-1:0] migrate,     // functions always executed on the OIC
  // OIC hand-over
  output logic            oic_start,
  output oic_func_e       oic_func,
  output logic [XLEN-1:0] oic_a,
  output logic [XLEN-1:0] oic_b,
  input  logic            oic_done,
  input  logic [XLEN-1:0] oic_result,
  input  logic [XLEN-1:0] oic_remainder,
  // status
  output logic [31:0]     pc,
  output logic            fault_detected,   // FDL mismatch (one pulse per fault)
  output logic            oic_wait,         // pipeline stalled for the OIC
  output logic            loaduse_stall,
  output logic            branch_flush,
  output logic            retire,           // a valid instruction is in WB
  output logic            ex_arith,         // EX holds an FDL-checked instruction
  output logic            migrated,         // hand-over by migration, not by a fault
  // debug
  input  logic [4:0]      dbg_reg,
  output logic [XLEN-1:0] dbg_reg_data,
  input  logic [31:0]     dbg_maddr,        // word index
  output logic [XLEN-1:0] dbg_mdata
);
  localparam int unsigned IAW = $clog2(IMEM_WORDS);
  localparam int unsigned DAW = $clog2(DMEM_WORDS);

  // ------------------------------------------------------------ pipeline regs
  typedef struct packed {
    logic            valid;
    logic [31:0]     ir;
    logic [31:0]     npc;
  } ifid_t;

  typedef struct packed {
    logic            valid;
    logic [31:0]     npc;
    logic [XLEN-1:0] a;
    logic [XLEN-1:0] b;
    logic [XLEN-1:0] imm;
    logic [4:0]      rs;
    logic [4:0]      rt;
    logic [4:0]      dst;
    alu_op_e         op;
    logic            use_imm;
    logic            reg_we;
    logic            mem_rd;
    logic            mem_wr;
    logic            beq;
    logic            bne;
    logic            blez;
    logic            bgtz;
    logic            bltz;
    logic            bgez;
    logic            jmp;
    logic [31:0]     jtarget;
    logic            hilo_we;
    logic            chk;       // arithmetic: checked by the FDL
    oic_func_e       func;      // OIC function, decoded from the IF/ID opcode
    logic            use_sa;    // ALU a operand is the shamt field (in imm)
    logic            link;      // jal/jalr: write NPC instead of the ALU output
    logic            jr;        // jump to register A
    logic [1:0]      msize;     // memory access: 0 word, 1 halfword, 2 byte
    logic            msign;     // sign-extend a byte or halfword load
  } idex_t;

  typedef struct packed {
    logic            valid;
    logic [XLEN-1:0] alu_out;
    logic [XLEN-1:0] b;
    logic [4:0]      dst;
    logic            reg_we;
    logic            mem_rd;
    logic            mem_wr;
    logic [1:0]      msize;
    logic            msign;
  } exmem_t;

  typedef struct packed {
    logic            valid;
    logic [XLEN-1:0] alu_out;
    logic [XLEN-1:0] lmd;
    logic [4:0]      dst;
    logic            reg_we;
    logic            mem_rd;
  } memwb_t;

  ifid_t  ifid;
  idex_t  idex, idex_n;
  exmem_t exmem;
  memwb_t memwb;

  logic [31:0]     pc_q;
  logic [XLEN-1:0] hi_q, lo_q;

  typedef enum logic {C_RUN, C_OIC} cstate_e;
  cstate_e cst;

  // ------------------------------------------------------------ memories
  logic [31:0]     imem [IMEM_WORDS];
  logic [XLEN-1:0] dmem [DMEM_WORDS];

  always_ff @(posedge clk) begin
    if (prog_we) imem[prog_addr[IAW-1:0]] <= prog_data;
  end

  // ------------------------------------------------------------ IF
  logic [31:0] if_ir;
  assign if_ir = imem[pc_q[IAW+1:2]];

  // ------------------------------------------------------------ ID
  logic [31:0]     ir;
  logic [5:0]      id_op, id_fn;
  logic [4:0]      id_rs, id_rt, id_rd;
  logic [15:0]     id_imm;
  logic [XLEN-1:0] rf_a, rf_b, wb_data;
  logic            wb_we;

  assign ir     = ifid.ir;
  assign id_op  = ir[31:26];
  assign id_rs  = ir[25:21];
  assign id_rt  = ir[20:16];
  assign id_rd  = ir[15:11];
  assign id_fn  = ir[5:0];
  assign id_imm = ir[15:0];

  regfile u_rf (
    .clk, .rst_n,
    .ra1(id_rs), .ra2(id_rt), .ra3(dbg_reg),
    .rd1(rf_a), .rd2(rf_b), .rd3(dbg_reg_data),
    .we(wb_we), .wa(memwb.dst), .wd(wb_data)
  );

  always_comb begin
    idex_n         = '0;
    idex_n.valid   = ifid.valid;
    idex_n.npc     = ifid.npc;
    idex_n.a       = rf_a;
    idex_n.b       = rf_b;
    idex_n.rs      = id_rs;
    idex_n.rt      = id_rt;
    idex_n.imm     = {{16{id_imm[15]}}, id_imm};
    idex_n.op      = ALU_ADD;
    idex_n.jtarget = {ifid.npc[31:28], ir[25:0], 2'b00};
    unique case (id_op)
      OP_RTYPE: begin
        idex_n.dst = id_rd;
        unique case (id_fn)
          FN_ADD, FN_ADDU: begin idex_n.op = ALU_ADD; idex_n.reg_we = 1'b1; idex_n.chk = 1'b1; end
          FN_SUB, FN_SUBU: begin idex_n.op = ALU_SUB; idex_n.reg_we = 1'b1; idex_n.chk = 1'b1; end
          FN_AND:  begin idex_n.op = ALU_AND; idex_n.reg_we = 1'b1; end
          FN_OR:   begin idex_n.op = ALU_OR;  idex_n.reg_we = 1'b1; end
          FN_XOR:  begin idex_n.op = ALU_XOR; idex_n.reg_we = 1'b1; end
          FN_NOR:  begin idex_n.op = ALU_NOR; idex_n.reg_we = 1'b1; end
          FN_SLT:  begin idex_n.op = ALU_SLT; idex_n.reg_we = 1'b1; end
          FN_SLTU: begin idex_n.op = ALU_SLTU; idex_n.reg_we = 1'b1; end
          FN_SLL, FN_SRL, FN_SRA, FN_SLLV, FN_SRLV, FN_SRAV: begin
            idex_n.op = (id_fn[1:0] == 2'b00) ? ALU_SLL : (id_fn[1:0] == 2'b10) ? ALU_SRL : ALU_SRA;
            idex_n.use_sa = !id_fn[2];
            idex_n.imm    = XLEN'(ir[10:6]);
            idex_n.reg_we = 1'b1;
          end
          FN_JR:   idex_n.jr = 1'b1;
          FN_JALR: begin idex_n.jr = 1'b1; idex_n.link = 1'b1; idex_n.reg_we = 1'b1; end
          FN_MULT:  begin idex_n.op = ALU_MULT;  idex_n.hilo_we = 1'b1; end
          FN_MULTU: begin idex_n.op = ALU_MULTU; idex_n.hilo_we = 1'b1; end
          FN_DIVU: begin idex_n.op = ALU_DIVU; idex_n.hilo_we = 1'b1; idex_n.chk = 1'b1; end
          FN_MFHI: begin idex_n.op = ALU_MFHI; idex_n.reg_we = 1'b1; end
          FN_MTHI: begin idex_n.op = ALU_MTHI; idex_n.hilo_we = 1'b1; end
          FN_MTLO: begin idex_n.op = ALU_MTLO; idex_n.hilo_we = 1'b1; end
          FN_MFLO: begin idex_n.op = ALU_MFLO; idex_n.reg_we = 1'b1; end
          default: ;
        endcase
      end
      OP_ADDI, OP_ADDIU: begin
        idex_n.op = ALU_ADD; idex_n.use_imm = 1'b1; idex_n.dst = id_rt;
        idex_n.reg_we = 1'b1; idex_n.chk = 1'b1;
      end
      OP_SLTI, OP_SLTIU: begin
        idex_n.op = (id_op == OP_SLTI) ? ALU_SLT : ALU_SLTU; idex_n.use_imm = 1'b1; idex_n.dst = id_rt; idex_n.reg_we = 1'b1;
      end
      OP_ANDI, OP_ORI, OP_XORI: begin
        idex_n.op  = (id_op == OP_ANDI) ? ALU_AND : (id_op == OP_ORI) ? ALU_OR : ALU_XOR;
        idex_n.imm = {16'h0000, id_imm};
        idex_n.use_imm = 1'b1; idex_n.dst = id_rt; idex_n.reg_we = 1'b1;
      end
      OP_LUI: begin
        idex_n.op = ALU_LUI; idex_n.use_imm = 1'b1; idex_n.dst = id_rt; idex_n.reg_we = 1'b1;
      end
      OP_LW, OP_LH, OP_LHU, OP_LB, OP_LBU: begin
        idex_n.use_imm = 1'b1; idex_n.dst = id_rt; idex_n.reg_we = 1'b1; idex_n.mem_rd = 1'b1;
        idex_n.msize = (id_op == OP_LW) ? 2'd0 : (id_op[1:0] == 2'b01) ? 2'd1 : 2'd2;
        idex_n.msign = !id_op[2];
      end
      OP_SW, OP_SH, OP_SB: begin
        idex_n.use_imm = 1'b1; idex_n.mem_wr = 1'b1;
        idex_n.msize = (id_op == OP_SW) ? 2'd0 : (id_op == OP_SH) ? 2'd1 : 2'd2;
      end
      OP_BEQ: idex_n.beq = 1'b1;
      OP_BNE: idex_n.bne = 1'b1;
      OP_BLEZ: idex_n.blez = 1'b1;
      OP_BGTZ: idex_n.bgtz = 1'b1;
      OP_REGIMM: begin
        idex_n.bltz = (id_rt == 5'd0);
        idex_n.bgez = (id_rt == 5'd1);
      end
      OP_J:   idex_n.jmp = 1'b1;
      OP_JAL: begin idex_n.jmp = 1'b1; idex_n.link = 1'b1; idex_n.dst = 5'd31; idex_n.reg_we = 1'b1; end
      default: ;
    endcase
    if (idex_n.dst == 5'd0) idex_n.reg_we = 1'b0;
    idex_n.func = oic_func_of(idex_n.op, idex_n.use_imm, id_imm, id_rt);
    if (!ifid.valid) begin
      idex_n.reg_we = 1'b0; idex_n.mem_rd = 1'b0; idex_n.mem_wr = 1'b0;
      idex_n.beq = 1'b0; idex_n.bne = 1'b0; idex_n.jmp = 1'b0; idex_n.jr = 1'b0;
      idex_n.blez = 1'b0; idex_n.bgtz = 1'b0; idex_n.bltz = 1'b0; idex_n.bgez = 1'b0;
      idex_n.hilo_we = 1'b0; idex_n.chk = 1'b0;
    end
  end

  // Load-use hazard: the instruction in EX loads a register ID reads.
  logic lu_hazard;
  assign lu_hazard = idex.valid && idex.mem_rd && ifid.valid &&
                     (idex.dst == id_rs || idex.dst == id_rt);

  // ------------------------------------------------------------ EX
  logic [XLEN-1:0] fwd_a, fwd_b, opa, opb, alu_y, alu_rem;
  logic            fdl_fault, take, ex_hold, oic_fire;
  logic [31:0]     br_target;

  function automatic logic [XLEN-1:0] fwd(input logic [4:0] r, input logic [XLEN-1:0] v,
                                          input exmem_t em, input memwb_t mw,
                                          input logic [XLEN-1:0] mwd);
    if (r != 5'd0 && em.valid && em.reg_we && !em.mem_rd && em.dst == r) return em.alu_out;
    if (r != 5'd0 && mw.valid && mw.reg_we && mw.dst == r)                return mwd;
    return v;
  endfunction

  assign fwd_a = fwd(idex.rs, idex.a, exmem, memwb, wb_data);
  assign fwd_b = fwd(idex.rt, idex.b, exmem, memwb, wb_data);
  assign opa   = idex.use_sa  ? idex.imm : fwd_a;
  assign opb   = idex.use_imm ? idex.imm : fwd_b;

  alu u_alu (
    .op(idex.op), .a(opa), .b(opb), .hi_in(hi_q), .lo_in(lo_q),
    .fault_mask(alu_fault_mask), .y(alu_y), .rem(alu_rem)
  );

  fdl u_fdl (
    .check(idex.valid && idex.chk && cst == C_RUN),
    .op(idex.op), .a(fwd_a), .b(opb), .alu_y(alu_y), .alu_rem(alu_rem),
    .fault(fdl_fault)
  );

  assign br_target = idex.npc + {idex.imm[29:0], 2'b00};
  assign take      = idex.valid && cst == C_RUN &&
                     ((idex.beq && fwd_a == fwd_b) || (idex.bne && fwd_a != fwd_b) || idex.jmp || idex.jr ||
     (idex.bltz && fwd_a[XLEN-1]) || (idex.bgez && !fwd_a[XLEN-1]) ||
     (idex.blez && (fwd_a[XLEN-1] || fwd_a == '0)) || (idex.bgtz && !fwd_a[XLEN-1] && fwd_a != '0));

  // Hand-over: on an FDL fault, or unconditionally for a function selected
  // in migrate. Start the OIC, hold EX and everything before it.
  assign migrated = idex.valid && idex.chk && cst == C_RUN && migrate[idex.func] && !fdl_fault;
  assign oic_fire = fdl_fault || migrated;
  assign ex_hold  = oic_fire || (cst == C_OIC && !oic_done);

  assign oic_start = oic_fire;
  assign oic_func  = idex.func;
  assign oic_a     = fwd_a;
  assign oic_b     = opb;

  // ------------------------------------------------------------ MEM / WB
  logic [XLEN-1:0] mem_word, mem_rdata, mem_wdata;
  logic [1:0]      mem_off;
  assign mem_word = dmem[exmem.alu_out[DAW+1:2]];
  assign mem_off  = exmem.alu_out[1:0];

  // Byte and halfword lanes: extract for loads, merge for stores.
  always_comb begin
    logic [7:0]  by;
    logic [15:0] hw;
    by = mem_word[8*mem_off +: 8];
    hw = mem_off[1] ? mem_word[31:16] : mem_word[15:0];
    unique case (exmem.msize)
      2'd1:    mem_rdata = {{16{exmem.msign & hw[15]}}, hw};
      2'd2:    mem_rdata = {{24{exmem.msign & by[7]}}, by};
      default: mem_rdata = mem_word;
    endcase
    mem_wdata = mem_word;
    unique case (exmem.msize)
      2'd1:    if (mem_off[1]) mem_wdata[31:16] = exmem.b[15:0]; else mem_wdata[15:0] = exmem.b[15:0];
      2'd2:    mem_wdata[8*mem_off +: 8] = exmem.b[7:0];
      default: mem_wdata = exmem.b;
    endcase
  end

  always_ff @(posedge clk) begin
    if (exmem.valid && exmem.mem_wr) dmem[exmem.alu_out[DAW+1:2]] <= mem_wdata;
  end
  assign dbg_mdata = dmem[dbg_maddr[DAW-1:0]];

  assign wb_we   = memwb.valid && memwb.reg_we;
  assign wb_data = memwb.mem_rd ? memwb.lmd : memwb.alu_out;

  // ------------------------------------------------------------ sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc_q  <= '0;
      ifid  <= '0;
      idex  <= '0;
      exmem <= '0;
      memwb <= '0;
      hi_q  <= '0;
      lo_q  <= '0;
      cst   <= C_RUN;
    end else begin
      // MEM -> WB
      memwb.valid   <= exmem.valid;
      memwb.alu_out <= exmem.alu_out;
      memwb.lmd     <= mem_rdata;
      memwb.dst     <= exmem.dst;
      memwb.reg_we  <= exmem.reg_we;
      memwb.mem_rd  <= exmem.mem_rd;

      if (ex_hold) begin
        // Stall: PC, IF/ID, ID/EX keep their values; a bubble enters EX/MEM.
        exmem <= '0;
        if (oic_fire) cst <= C_OIC;
      end else if (cst == C_OIC) begin
        // OIC done: its result goes to MEM/WB.ALUOutput, the pipeline resumes.
        cst   <= C_RUN;
        exmem <= '0;
        memwb.valid   <= 1'b1;
        memwb.alu_out <= oic_result;
        memwb.dst     <= idex.dst;
        memwb.reg_we  <= idex.reg_we;
        memwb.mem_rd  <= 1'b0;
        if (idex.hilo_we) begin
          lo_q <= oic_result;
          hi_q <= oic_remainder;
        end
        pc_q <= pc_q + 32'd4;
        ifid <= '{valid: 1'b1, ir: if_ir, npc: pc_q + 32'd4};
        idex <= idex_n;
      end else begin
        // EX -> MEM
        exmem.valid   <= idex.valid;
        exmem.alu_out <= idex.link ? idex.npc : alu_y;
        exmem.b       <= fwd_b;
        exmem.dst     <= idex.dst;
        exmem.reg_we  <= idex.reg_we && idex.valid;
        exmem.mem_rd  <= idex.mem_rd && idex.valid;
        exmem.mem_wr  <= idex.mem_wr && idex.valid;
        exmem.msize   <= idex.msize;
        exmem.msign   <= idex.msign;
        if (idex.valid && idex.hilo_we) begin
          lo_q <= alu_y;
          hi_q <= alu_rem;
        end
        if (take) begin
          pc_q <= idex.jr ? fwd_a : idex.jmp ? idex.jtarget : br_target;
          ifid <= '0;
          idex <= '0;
        end else if (lu_hazard) begin
          idex <= '0;                       // bubble; PC and IF/ID hold
        end else begin
          pc_q <= pc_q + 32'd4;
          ifid <= '{valid: 1'b1, ir: if_ir, npc: pc_q + 32'd4};
          idex <= idex_n;
        end
      end
    end
  end

  // Load-use hazard in the OIC-done cycle: the instruction leaving EX is
  // arithmetic, never a load, so the plain advance above is safe.
  a_no_lu_on_resume: assert property (@(posedge clk) disable iff (!rst_n)
    (cst == C_OIC && oic_done) |-> !lu_hazard);
  a_done_only_waiting: assert property (@(posedge clk) disable iff (!rst_n)
    oic_done |-> cst == C_OIC);

  assign pc             = pc_q;
  assign fault_detected = fdl_fault;
  assign oic_wait       = (cst == C_OIC);
  assign loaduse_stall  = lu_hazard && !ex_hold && cst == C_RUN && !take;
  assign branch_flush   = take;
  assign retire         = memwb.valid;
  assign ex_arith       = idex.valid && idex.chk && cst == C_RUN;
endmodule
