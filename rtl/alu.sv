// alu: the EX-stage arithmetic logic unit of the MIPS core.
//
// Computes y = a op b for the implemented MIPS subset. For DIVU, y is the
// unsigned quotient and rem the remainder (they go to LO and HI); division by
// zero gives an all-ones quotient and the dividend as remainder, a choice of
// this design (MIPS leaves it undefined). Shifts move b by a[4:0] (the core
// puts the shamt field or rs there). MULT/MULTU give the low product word on y
// and the high word on rem (LO and HI); MTHI/MTLO put a on rem or y and pass
// the other register through unchanged. MFHI/MFLO pass the HI/LO values
// given on hi_in/lo_in. fault_mask is XORed into y and rem to model a soft
// error striking the ALU, the event the fault detection logic is there to
// catch; tie it to zero in normal operation. Purely combinational.
module alu
  import mcs_pkg::*;
(
  input  alu_op_e         op,
  input  logic [XLEN-1:0] a,
  input  logic [XLEN-1:0] b,
  input  logic [XLEN-1:0] hi_in,
  input  logic [XLEN-1:0] lo_in,
  input  logic [XLEN-1:0] fault_mask,
  output logic [XLEN-1:0] y,
  output logic [XLEN-1:0] rem
);
  logic [XLEN-1:0] q, r;
  logic [2*XLEN-1:0] ps, pu;

  always_comb begin
    q = (b == '0) ? '1 : a / b;
    r = (b == '0) ? a  : a % b;
    ps = $signed({{XLEN{a[XLEN-1]}}, a}) * $signed({{XLEN{b[XLEN-1]}}, b});
    pu = {{XLEN{1'b0}}, a} * {{XLEN{1'b0}}, b};
    rem = '0;
    unique case (op)
      ALU_ADD:  y = a + b;
      ALU_SUB:  y = a - b;
      ALU_AND:  y = a & b;
      ALU_OR:   y = a | b;
      ALU_XOR:  y = a ^ b;
      ALU_NOR:  y = ~(a | b);
      ALU_SLT:  y = XLEN'($signed(a) < $signed(b));
      ALU_SLTU: y = XLEN'(a < b);
      ALU_SLL:  y = b << a[4:0];
      ALU_SRL:  y = b >> a[4:0];
      ALU_SRA:  y = XLEN'($signed(b) >>> a[4:0]);
      ALU_LUI:  y = {b[15:0], 16'h0000};
      ALU_DIVU: begin y = q; rem = r; end
      ALU_MULT:  begin y = ps[XLEN-1:0]; rem = ps[2*XLEN-1:XLEN]; end
      ALU_MULTU: begin y = pu[XLEN-1:0]; rem = pu[2*XLEN-1:XLEN]; end
      ALU_MFHI: y = hi_in;
      ALU_MTHI: begin y = lo_in; rem = a; end
      ALU_MTLO: begin y = a; rem = hi_in; end
      ALU_MFLO: y = lo_in;
      default:  y = '0;
    endcase
    y   = y ^ fault_mask;
    rem = rem ^ fault_mask;
  end
endmodule
