// oic_cw_rom: the control word memory of the One Instruction Core.
//
// Holds the microprograms with which the OIC emulates the MIPS arithmetic
// functions ADD, MOV, INC, DEC, SUB and DIV using only subtract-and-branch-
// if-<=0 (subleq) steps. Each word drives one self-checking subtract (the
// subleq step, whose sign picks the next PC: <= 0 -> target, else PC+1) and
// up to three conventional subtracts in parallel; 'last' ends the program.
// All subtracts read the register values of the start of the cycle.
//
// Registers: X = first operand (A), Y = second operand (B), Z, W scratch,
// R = result. Sources ZERO and ONE are constants. Data is OW = 33 bits wide,
// both operands zero-extended, so the signed <= 0 test also orders unsigned
// 32-bit values (needed by DIV).
//
// Programs (entry address: words; '->' is the branch target):
//   SUB  @0 : R = X - Y                                            1 word
//   DEC  @1 : R = X - 1                                            1 word
//   MOV  @2 : R = X - 0                                            1 word
//   ADD  @3 : Z = 0 - Y ; @4: R = X - Z                            2 words
//   INC  @5 : Z = 0 - 1 ; @6: R = X - Z                            2 words
//   DIV  @8 : test Y - 0 (<=0 -> @14 divide by zero) | Z = 0 - Y,
//             W = Y - 0, R = 0 - 0
//        @9 : Y = Y - X (<= 0 -> @11, X >= divisor) | X = 0 - 1
//        @10: X = W - Y, last          (quotient 0, remainder = X)
//        @11: Y = Y - Z (<= 0 -> @11)  | R = R - X  (R + 1)
//        @12: X = W - Y, last          (remainder)
//        @14: R = 0 - 1, last          (divide by zero: quotient all ones,
//                                       remainder = dividend)
//   DIV takes 3 + quotient words. The quotient is left in R, the remainder
//   in X. Unused words are empty 'last' words.
//
// Interface: combinational read, addr in, cw out. The programs and the word
// format are this design's own; the paper states only that control words
// from a memory drive the multiplexer selects of the subtractors.
module oic_cw_rom
  import mcs_pkg::*;
(
  input  logic [CW_AW-1:0] addr,
  output oic_cw_t          cw
);
  localparam oic_op_t NOP = '{we: 1'b0, dst: D_X, min: S_ZERO, sub: S_ZERO};

  function automatic oic_op_t op(input oic_dst_e d, input oic_src_e m, input oic_src_e s);
    return '{we: 1'b1, dst: d, min: m, sub: s};
  endfunction

  function automatic oic_op_t test(input oic_src_e m, input oic_src_e s);
    return '{we: 1'b0, dst: D_X, min: m, sub: s};
  endfunction

  always_comb begin
    cw        = '0;
    cw.sc     = NOP;
    cw.lane   = {N_LANES{NOP}};
    cw.target = addr + CW_AW'(1);
    cw.last   = 1'b0;
    unique case (addr)
      5'd0:  begin cw.sc = op(D_R, S_X, S_Y);    cw.last = 1'b1; end        // SUB
      5'd1:  begin cw.sc = op(D_R, S_X, S_ONE);  cw.last = 1'b1; end        // DEC
      5'd2:  begin cw.sc = op(D_R, S_X, S_ZERO); cw.last = 1'b1; end        // MOV
      5'd3:  begin cw.sc = op(D_Z, S_ZERO, S_Y); end                         // ADD
      5'd4:  begin cw.sc = op(D_R, S_X, S_Z);    cw.last = 1'b1; end
      5'd5:  begin cw.sc = op(D_Z, S_ZERO, S_ONE); end                       // INC
      5'd6:  begin cw.sc = op(D_R, S_X, S_Z);    cw.last = 1'b1; end
      5'd8:  begin                                                          // DIV
        cw.sc      = test(S_Y, S_ZERO);
        cw.target  = 5'd14;
        cw.lane[0] = op(D_Z, S_ZERO, S_Y);
        cw.lane[1] = op(D_W, S_Y, S_ZERO);
        cw.lane[2] = op(D_R, S_ZERO, S_ZERO);
      end
      5'd9:  begin
        cw.sc      = op(D_Y, S_Y, S_X);
        cw.target  = 5'd11;
        cw.lane[0] = op(D_X, S_ZERO, S_ONE);
      end
      5'd10: begin cw.sc = op(D_X, S_W, S_Y);    cw.last = 1'b1; end
      5'd11: begin
        cw.sc      = op(D_Y, S_Y, S_Z);
        cw.target  = 5'd11;
        cw.lane[0] = op(D_R, S_R, S_X);
      end
      5'd12: begin cw.sc = op(D_X, S_W, S_Y);    cw.last = 1'b1; end
      5'd14: begin cw.sc = op(D_R, S_ZERO, S_ONE); cw.last = 1'b1; end
      default: cw.last = 1'b1;
    endcase
  end
endmodule
