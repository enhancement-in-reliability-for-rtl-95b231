// fdl: Fault Detection Logic of the MIPS core.
//
// Executes every arithmetic instruction a second time, concurrently with the
// EX-stage ALU, and compares its own result with the ALU output; a mismatch
// is a fault, on which the core stalls and hands the instruction to the One
// Instruction Core. Logical instructions, comparisons, loads/stores and
// branches are not checked, as in the paper ("all the arithmetic
// instructions (except logical instructions)").
//
// The arithmetic instructions checked here are add, addu, sub, subu, addi,
// addiu (ALU_ADD / ALU_SUB) and divu (ALU_DIVU, quotient and remainder both
// compared). Which instructions count as arithmetic beyond add/sub, and the
// use of a plain duplicate of the arithmetic as the checker, are choices of
// this design.
//
// Interface: combinational. check qualifies the comparison (a valid
// arithmetic instruction is in EX); fault is high when the ALU disagrees.
module fdl
  import mcs_pkg::*;
(
  input  logic            check,
  input  alu_op_e         op,
  input  logic [XLEN-1:0] a,
  input  logic [XLEN-1:0] b,
  input  logic [XLEN-1:0] alu_y,
  input  logic [XLEN-1:0] alu_rem,
  output logic            fault
);
  logic [XLEN-1:0] ref_y, ref_rem;
  logic            cmp_rem;

  always_comb begin
    ref_rem = '0;
    cmp_rem = 1'b0;
    unique case (op)
      ALU_ADD:  ref_y = a + b;
      ALU_SUB:  ref_y = a - b;
      ALU_DIVU: begin
        ref_y   = (b == '0) ? '1 : a / b;
        ref_rem = (b == '0) ? a  : a % b;
        cmp_rem = 1'b1;
      end
      default:  ref_y = alu_y;
    endcase
    fault = check && is_arith(op) &&
            ((ref_y != alu_y) || (cmp_rem && (ref_rem != alu_rem)));
  end
endmodule
