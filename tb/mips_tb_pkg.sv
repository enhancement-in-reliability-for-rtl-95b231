// mips_tb_pkg: testbench support for the MCS-OIC design.
//
// Holds an instruction encoder for the implemented MIPS subset, a random
// program generator, and an instruction-set reference model (mips_iss), a
// plain one-instruction-at-a-time interpreter written independently of the
// pipelined RTL. Testbenches run a program on both and compare the register
// file, HI/LO effects (via mfhi/mflo) and data memory.
package mips_tb_pkg;

  // ------------------------------------------------------------ encoder
  function automatic logic [31:0] r_ins(input logic [5:0] fn, input int rd, input int rs,
                                        input int rt);
    return {6'h00, 5'(rs), 5'(rt), 5'(rd), 5'h00, fn};
  endfunction

  function automatic logic [31:0] i_ins(input logic [5:0] op, input int rt, input int rs,
                                        input int imm);
    return {op, 5'(rs), 5'(rt), 16'(imm)};
  endfunction

  function automatic logic [31:0] j_ins(input int target_word);
    return {6'h02, 26'(target_word)};
  endfunction

  // Halt idiom: beq $0,$0,-1 (branch to itself).
  localparam logic [31:0] HALT = {6'h04, 5'd0, 5'd0, 16'hFFFF};

  // ------------------------------------------------------------ reference model
  class mips_iss;
    logic [31:0] regs [32];
    logic [31:0] mem  [];
    logic [31:0] prog [];
    logic [31:0] hi, lo;
    logic [31:0] pc;
    int          n_arith;

    function new(int dwords, logic [31:0] p []);
      mem  = new [dwords];
      prog = p;
      foreach (regs[i]) regs[i] = '0;
      foreach (mem[i])  mem[i]  = '0;
      hi = '0; lo = '0; pc = '0; n_arith = 0;
    endfunction

    function automatic void wr(int r, logic [31:0] v);
      if (r != 0) regs[r] = v;
    endfunction

    // Executes one instruction; returns 1 when the halt idiom is reached.
    function automatic bit step();
      logic [31:0] ir, a, b, se, ze, npc, ea, w;
      int op, fn, rs, rt, rd;
      if (pc[31:2] >= prog.size()) return 1;
      ir = prog[pc[31:2]];
      if (ir == HALT) return 1;
      op = int'(ir[31:26]); fn = int'(ir[5:0]);
      rs = int'(ir[25:21]); rt = int'(ir[20:16]); rd = int'(ir[15:11]);
      a = regs[rs]; b = regs[rt];
      se = {{16{ir[15]}}, ir[15:0]}; ze = {16'h0, ir[15:0]};
      npc = pc + 4;
      case (op)
        'h00: case (fn)
          'h20, 'h21: begin wr(rd, a + b); n_arith++; end
          'h22, 'h23: begin wr(rd, a - b); n_arith++; end
          'h24: wr(rd, a & b);
          'h25: wr(rd, a | b);
          'h26: wr(rd, a ^ b);
          'h27: wr(rd, ~(a | b));
          'h2A: wr(rd, {31'd0, $signed(a) < $signed(b)});
          'h2B: wr(rd, {31'd0, a < b});
          'h00: wr(rd, b << ir[10:6]);
          'h02: wr(rd, b >> ir[10:6]);
          'h03: wr(rd, $signed(b) >>> ir[10:6]);
          'h04: wr(rd, b << a[4:0]);
          'h06: wr(rd, b >> a[4:0]);
          'h07: wr(rd, $signed(b) >>> a[4:0]);
          'h08: npc = a;
          'h09: begin wr(rd, npc); npc = a; end
          'h18: {hi, lo} = 64'($signed({{32{a[31]}}, a}) * $signed({{32{b[31]}}, b}));
          'h19: {hi, lo} = {32'd0, a} * {32'd0, b};
          'h1B: begin
            lo = (b == 0) ? 32'hFFFF_FFFF : a / b;
            hi = (b == 0) ? a : a % b;
            n_arith++;
          end
          'h10: wr(rd, hi);
          'h11: hi = a;
          'h13: lo = a;
          'h12: wr(rd, lo);
          default: ;
        endcase
        'h08, 'h09: begin wr(rt, a + se); n_arith++; end
        'h0A: wr(rt, {31'd0, $signed(a) < $signed(se)});
        'h0B: wr(rt, {31'd0, a < se});
        'h0C: wr(rt, a & ze);
        'h0D: wr(rt, a | ze);
        'h0E: wr(rt, a ^ ze);
        'h0F: wr(rt, {ir[15:0], 16'h0});
        'h23: wr(rt, mem[(a + se) >> 2]);
        'h20, 'h24: begin                                   // lb, lbu
          ea = a + se; w = mem[ea >> 2] >> (8 * ea[1:0]);
          wr(rt, op == 'h20 ? {{24{w[7]}}, w[7:0]} : {24'd0, w[7:0]});
        end
        'h21, 'h25: begin                                   // lh, lhu
          ea = a + se; w = mem[ea >> 2] >> (8 * ea[1:0]);
          wr(rt, op == 'h21 ? {{16{w[15]}}, w[15:0]} : {16'd0, w[15:0]});
        end
        'h28: begin                                         // sb
          ea = a + se; w = mem[ea >> 2];
          w[8 * ea[1:0] +: 8] = b[7:0]; mem[ea >> 2] = w;
        end
        'h29: begin                                         // sh
          ea = a + se; w = mem[ea >> 2];
          w[8 * ea[1:0] +: 16] = b[15:0]; mem[ea >> 2] = w;
        end
        'h2B: mem[(a + se) >> 2] = b;
        'h04: if (a == b) npc = npc + (se << 2);
        'h05: if (a != b) npc = npc + (se << 2);
        'h06: if ($signed(a) <= 0) npc = npc + (se << 2);
        'h07: if ($signed(a) > 0) npc = npc + (se << 2);
        'h01: if ((rt == 0 && a[31]) || (rt == 1 && !a[31])) npc = npc + (se << 2);
        'h02: npc = {npc[31:28], ir[25:0], 2'b00};
        'h03: begin wr(31, npc); npc = {npc[31:28], ir[25:0], 2'b00}; end
        default: ;
      endcase
      pc = npc;
      return 0;
    endfunction
  endclass

  // ------------------------------------------------------------ program generator
  // Random straight-line blocks with forward branches and jumps (j is not
  // generated; jal, jr and jalr are), shifts, mult/multu, mthi/mtlo, loads and stores
  // (word, halfword and byte) to
  // the first 64 data words, and divu sequences with small operands so that
  // the OIC's repeated-subtraction division stays short. Starts by seeding
  // seven registers, filling those 64 words from them, and ends with HALT.
  function automatic void gen_program(ref logic [31:0] p [], input int n);
    int k, r1, r2, r3, sel, skip, last_ctl;
    p = new [n + 72];
    k = 0; last_ctl = -10;
    // seed registers with 32-bit values, then fill the data words the
    // program uses from them (data memory has no reset)
    for (int r = 1; r < 8; r++) begin
      p[k++] = i_ins(6'h0F, r, 0, int'($urandom_range(0, 65535)));
      p[k++] = i_ins(6'h0D, r, r, int'($urandom_range(0, 65535)));
    end
    for (int m = 0; m < 64; m++) p[k++] = i_ins(6'h2B, 1 + m % 7, 0, 4 * m);
    n = n + 64;
    while (k < n - 6) begin
      r1 = $urandom_range(1, 15); r2 = $urandom_range(0, 15); r3 = $urandom_range(0, 15);
      sel = $urandom_range(0, 99);
      if (sel < 14)       p[k++] = r_ins(6'h21, r1, r2, r3);                          // addu
      else if (sel < 22)  p[k++] = r_ins(6'h20, r1, r2, 0);                           // move
      else if (sel < 32)  p[k++] = r_ins(6'h23, r1, r2, r3);                          // subu
      else if (sel < 40)  p[k++] = i_ins(6'h09, r1, r2, 1);                           // inc
      else if (sel < 48)  p[k++] = i_ins(6'h09, r1, r2, -1);                          // dec
      else if (sel < 56)  p[k++] = i_ins(6'h08, r1, r2, int'($urandom_range(0, 65535)));
      else if (sel < 59)  p[k++] = r_ins(6'h24 + 6'($urandom_range(0, 3)), r1, r2, r3);
      else if (sel < 60) begin                                                         // mult(u)
        p[k++] = r_ins(6'h18 + 6'($urandom_range(0, 1)), 0, r2, r3);
        if ($urandom_range(0, 1)) p[k++] = r_ins($urandom_range(0, 1) ? 6'h11 : 6'h13, 0, r3, 0);
        p[k++] = r_ins(6'h12, r1, 0, 0);
        p[k++] = r_ins(6'h10, r2 == 0 ? 2 : r2, 0, 0);
      end
      else if (sel < 61)  p[k++] = r_ins(6'h2A, r1, r2, r3);
      else if (sel < 62)  p[k++] = r_ins(6'h2B, r1, r2, r3);                          // sltu
      else if (sel < 63)  p[k++] = i_ins(6'h0B, r1, r2, int'($urandom_range(0, 65535))); // sltiu
      else if (sel < 64)  p[k++] = i_ins(6'h0F, r1, 0, int'($urandom_range(0, 65535)));
      else if (sel < 65)                                                               // shift by shamt
        p[k++] = r_ins(6'($urandom_range(0, 3) & 3), r1, 0, r3) | (32'($urandom_range(0, 31)) << 6);
      else if (sel < 66)                                                               // shift by rs
        p[k++] = r_ins(6'h04 + 6'($urandom_range(0, 3) & 3), r1, r2, r3);
      else if (sel < 71)  p[k++] = i_ins(6'h2B, r3, 0, 4 * int'($urandom_range(0, 63)));  // sw
      else if (sel < 72)  p[k++] = i_ins(6'h28, r3, 0, int'($urandom_range(0, 255)));      // sb
      else if (sel < 73)  p[k++] = i_ins(6'h29, r3, 0, 2 * int'($urandom_range(0, 127)));  // sh
      else if (sel < 78)  p[k++] = i_ins(6'h23, r1, 0, 4 * int'($urandom_range(0, 63)));  // lw
      else if (sel < 82) begin        // lb(u)/lh(u), result folded into r20 so it stays visible
        if (sel < 80) p[k++] = i_ins($urandom_range(0, 1) ? 6'h20 : 6'h24, r1, 0,
                                     int'($urandom_range(0, 255)));
        else          p[k++] = i_ins($urandom_range(0, 1) ? 6'h21 : 6'h25, r1, 0,
                                     2 * int'($urandom_range(0, 127)));
        p[k++] = r_ins(6'h26, 20, 20, r1);
      end
      else if (sel < 86) begin                                                         // lw-use
        p[k++] = i_ins(6'h23, r1, 0, 4 * int'($urandom_range(0, 63)));
        p[k++] = r_ins(6'h21, r2 == 0 ? 1 : r2, r1, r3);
      end else if (sel < 92) begin                                                     // divu
        p[k++] = i_ins(6'h0D, 16, 0, int'($urandom_range(0, 4095)));
        p[k++] = i_ins(6'h0D, 17, 0, int'($urandom_range(0, 63)));
        p[k++] = r_ins(6'h1B, 0, 16, 17);
        p[k++] = r_ins(6'h12, r1, 0, 0);
        p[k++] = r_ins(6'h10, r2 == 0 ? 2 : r2, 0, 0);
      end else if (sel < 98 || k - last_ctl <= 4) begin                                // branch
        last_ctl = k;
        skip = $urandom_range(0, 3);
        case ($urandom_range(0, 3))
          0:       p[k++] = i_ins($urandom_range(0, 1) ? 6'h04 : 6'h05, r3, r2, skip);
          1:       p[k++] = i_ins($urandom_range(0, 1) ? 6'h06 : 6'h07, 0, r2, skip);
          2:       p[k++] = i_ins(6'h01, $urandom_range(0, 1), r2, skip);
          default: p[k++] = i_ins($urandom_range(0, 1) ? 6'h04 : 6'h05, r3, r2, skip);
        endcase
      end else if (sel < 99) begin                                                     // jal forward
        last_ctl = k;
        skip = $urandom_range(0, 2);
        p[k] = {6'h03, 26'(k + 1 + skip)}; k++;
      end else begin                                                                   // jr forward
        // Only where no earlier branch or jump can land on the jr and skip
        // the instruction that sets its target register.
        last_ctl = k + 1;
        skip = $urandom_range(0, 2);
        p[k] = i_ins(6'h09, r1, 0, 4 * (k + 2 + skip)); k++;
        p[k] = $urandom_range(0, 1) ? r_ins(6'h08, 0, r1, 0) : r_ins(6'h09, r3 == 0 ? 3 : r3, r1, 0);
        k++;
      end
    end
    while (k < n + 7) p[k++] = 32'h0000_0000;
    p[k++] = HALT;
    p = new [k](p);
  endfunction

endpackage
