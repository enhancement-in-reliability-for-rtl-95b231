// tb_fdl: checks the fault detection logic.
//
// For every operation the FDL is given the correct ALU output (computed
// here) and a single-bit-corrupted one. Arithmetic operations (ADD, SUB,
// DIVU including its remainder) must raise fault only for the corrupted
// output and only while check is high; logical operations are never
// flagged.
module tb_fdl;
  import mcs_pkg::*;
  logic            check;
  alu_op_e         op;
  logic [XLEN-1:0] a, b, alu_y, alu_rem;
  logic            fault;
  int checks = 0, failures = 0;

  fdl dut (.*);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic void golden(input alu_op_e o, input logic [XLEN-1:0] x,
                                 input logic [XLEN-1:0] y, output logic [XLEN-1:0] r,
                                 output logic [XLEN-1:0] m);
    m = '0;
    case (o)
      ALU_ADD:  r = x + y;
      ALU_SUB:  r = x - y;
      ALU_AND:  r = x & y;
      ALU_OR:   r = x | y;
      ALU_XOR:  r = x ^ y;
      ALU_DIVU: begin r = (y == 0) ? '1 : x / y; m = (y == 0) ? x : x % y; end
      default:  r = '0;
    endcase
  endfunction

  initial begin
    alu_op_e ops [6] = '{ALU_ADD, ALU_SUB, ALU_DIVU, ALU_AND, ALU_OR, ALU_XOR};
    logic [XLEN-1:0] r, m, bit1;
    bit arith;
    for (int i = 0; i < 3000; i++) begin
      op = ops[i % 6];
      a  = $urandom;
      b  = (i % 7 == 0) ? '0 : ((i % 3 == 0) ? XLEN'($urandom_range(1, 100)) : $urandom);
      golden(op, a, b, r, m);
      arith = (op == ALU_ADD || op == ALU_SUB || op == ALU_DIVU);
      bit1  = XLEN'(1) << $urandom_range(0, XLEN - 1);
      check = 1'b1; alu_y = r; alu_rem = m; #1;
      chk(fault == 1'b0, $sformatf("false alarm op=%s", op.name()));
      alu_y = r ^ bit1; #1;
      chk(fault == arith, $sformatf("result error op=%s fault=%b", op.name(), fault));
      if (op == ALU_DIVU) begin
        alu_y = r; alu_rem = m ^ bit1; #1;
        chk(fault == 1'b1, "remainder error on divu");
      end
      check = 1'b0; alu_y = r ^ bit1; #1;
      chk(fault == 1'b0, "no fault while check is low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
