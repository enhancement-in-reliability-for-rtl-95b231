// regfile: the 32 x 32-bit MIPS general register file.
//
// Two combinational read ports, one write port written on the rising clock
// edge; register 0 always reads zero. A write is visible to a read of the
// same register in the same cycle (write-through), so the WB stage and the
// ID stage may touch one register in one cycle. A third read port serves
// debug and test access. Registers are cleared by reset.
module regfile
  import mcs_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic [4:0]      ra1,
  input  logic [4:0]      ra2,
  input  logic [4:0]      ra3,
  output logic [XLEN-1:0] rd1,
  output logic [XLEN-1:0] rd2,
  output logic [XLEN-1:0] rd3,
  input  logic            we,
  input  logic [4:0]      wa,
  input  logic [XLEN-1:0] wd
);
  logic [XLEN-1:0] regs [32];

  function automatic logic [XLEN-1:0] rd(input logic [4:0] ra, input logic [XLEN-1:0] v,
                                        input logic w, input logic [4:0] a,
                                        input logic [XLEN-1:0] d);
    if (ra == 5'd0)          return '0;
    else if (w && a == ra)   return d;
    else                     return v;
  endfunction

  assign rd1 = rd(ra1, regs[ra1], we, wa, wd);
  assign rd2 = rd(ra2, regs[ra2], we, wa, wd);
  assign rd3 = rd(ra3, regs[ra3], we, wa, wd);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 32; i++) regs[i] <= '0;
    end else if (we && wa != 5'd0) begin
      regs[wa] <= wd;
    end
  end
endmodule
