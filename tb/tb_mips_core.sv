// tb_mips_core: tests the five-stage MIPS core with its fault detection
// logic, with the One Instruction Core replaced by a behavioural responder.
//
// Random programs (see mips_tb_pkg) run to the halt idiom, first without and
// then with single-bit soft errors injected into the ALU while an
// FDL-checked instruction is in EX. The responder answers each hand-over
// after a random 2..9 cycles with the function's result computed from the
// function code, operands A and B sent by the core, so a wrong function
// code or operand shows up as a register mismatch against the
// instruction-set reference model. The hand-over, the stall, the load-use
// stall and the branch flush must all occur.
//
// Two more programs run without injection but with functions selected for
// migration (SUB and DIV, then all six): every instruction of those
// functions must go to the responder even though no fault is found, no fault
// may be reported, and the results must still match the reference model.
module tb_mips_core;
  import mcs_pkg::*;
  import mips_tb_pkg::*;

  localparam int IMEM_WORDS = 1024;   // the core's default sizes
  localparam int DMEM_WORDS = 1024;
  localparam int N_PROGS    = 8;
  localparam int PROG_LEN   = 400;
  localparam int MAX_CYCLES = 2_000_000;

  logic            clk = 1'b0, rst_n = 1'b0;
  logic            prog_we = 1'b0;
  logic [31:0]     prog_addr = '0, prog_data = '0;
  logic [XLEN-1:0] alu_fault_mask = '0;
  logic [31:0]     pc;
  logic            fault_detected, oic_wait, oic_start;
  logic            oic_done = 1'b0;
  logic [XLEN-1:0] oic_a, oic_b, oic_result = '0, oic_remainder = '0;
  logic            loaduse_stall, branch_flush, retire, ex_arith, migrated;
  logic [N_FUNCS-1:0] migrate = '0;
  oic_func_e       oic_func;
  logic [4:0]      dbg_reg = '0;
  logic [XLEN-1:0] dbg_reg_data, dbg_mdata;
  logic [31:0]     dbg_maddr = '0;

  mips_core dut (.*);

  // Behavioural OIC: answers after a random delay.
  initial begin : oic_model
    oic_func_e f; logic [XLEN-1:0] x, y;
    forever begin
      @(posedge clk);
      if (oic_start) begin
        f = oic_func; x = oic_a; y = oic_b;
        repeat ($urandom_range(1, 8)) @(posedge clk);
        @(negedge clk);
        case (f)
          F_ADD: oic_result = x + y;
          F_MOV: oic_result = x;
          F_INC: oic_result = x + 1;
          F_DEC: oic_result = x - 1;
          F_SUB: oic_result = x - y;
          default: begin
            oic_result    = (y == 0) ? '1 : x / y;
            oic_remainder = (y == 0) ? x : x % y;
          end
        endcase
        oic_done = 1'b1;
        @(negedge clk);
        oic_done = 1'b0;
      end
    end
  end
  oic_func_e done_func;
  always @(posedge clk) if (oic_start) done_func <= oic_func;

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycles = 0;
  int n_fault = 0, n_wait = 0, n_lu = 0, n_flush = 0, n_retire = 0;
  int n_mig = 0, n_start = 0, n_mig_wrong = 0, n_fault_any = 0;
  int n_func [6];
  int inject_pct = 0;
  bit count_on = 1'b1;

  always @(posedge clk) begin
    cycles <= cycles + 1;
    if (rst_n && count_on) begin
      if (fault_detected) n_fault++;
      if (oic_wait)       n_wait++;
      if (loaduse_stall)  n_lu++;
      if (branch_flush)   n_flush++;
      if (retire)         n_retire++;
      if (oic_done) n_func[int'(done_func)]++;
    end
    if (rst_n) begin
      if (migrated) n_mig++;
      if (fault_detected) n_fault_any++;
      if (oic_start) n_start++;
      if (migrated && !migrate[oic_func]) n_mig_wrong++;
    end
  end

  // Soft-error injection, applied between clock edges.
  always @(negedge clk) begin
    alu_fault_mask <= '0;
    if (rst_n && ex_arith && ($urandom_range(0, 99) < inject_pct))
      alu_fault_mask <= XLEN'(1) << $urandom_range(0, XLEN - 1);
  end

  initial begin : watchdog
    repeat (MAX_CYCLES) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic load_and_run(input logic [31:0] p [], output int run_cycles);
    int stable;
    rst_n = 1'b0;
    @(negedge clk);
    for (int i = 0; i < IMEM_WORDS; i++) begin
      prog_we = 1'b1; prog_addr = i; prog_data = (i < p.size()) ? p[i] : 32'h0;
      @(negedge clk);
    end
    prog_we = 1'b0;
    rst_n = 1'b1;
    run_cycles = 0;
    stable = 0;
    // Run until the PC has circled the final halt word (a branch to itself)
    // long enough for the pipeline to drain.
    while (stable < 8 && run_cycles < 400_000) begin
      @(negedge clk);
      run_cycles++;
      if (pc >= 32'((p.size() - 1) * 4) && pc <= 32'((p.size() + 1) * 4) && !oic_wait) stable++;
      else stable = 0;
    end
  endtask

  task automatic compare(input mips_iss iss, input string tag);
    for (int r = 1; r < 32; r++) begin
      dbg_reg = 5'(r); #1;
      check(dbg_reg_data == iss.regs[r],
            $sformatf("%s r%0d dut=%h ref=%h", tag, r, dbg_reg_data, iss.regs[r]));
    end
    for (int m = 0; m < 64; m++) begin
      dbg_maddr = m; #1;
      check(dbg_mdata == iss.mem[m], $sformatf("%s mem[%0d] dut=%h ref=%h", tag, m,
                                               dbg_mdata, iss.mem[m]));
    end
  endtask

  initial begin
    logic [31:0] prog [];
    mips_iss     iss;
    int          rc, steps;
    foreach (n_func[i]) n_func[i] = 0;

    for (int t = 0; t < N_PROGS; t++) begin
      inject_pct = (t == 0) ? 0 : 40;
      gen_program(prog, PROG_LEN);
      check(prog.size() <= IMEM_WORDS, "program fits the instruction memory");
      iss = new(DMEM_WORDS, prog);
      steps = 0;
      while (!iss.step() && steps < 100_000) steps++;
      load_and_run(prog, rc);
      check(rc < 400_000, $sformatf("program %0d reached halt", t));
      compare(iss, $sformatf("prog%0d", t));
      if (t == 0) check(n_fault == 0, "no fault detected without injection");
    end

    count_on = 1'b0;
    for (int t = 0; t < 2; t++) begin
      int f0, s0;
      inject_pct = 0;
      migrate = (t == 0) ? N_FUNCS'((1 << F_SUB) | (1 << F_DIV)) : '1;
      f0 = n_fault_any; n_mig = 0; n_start = 0;
      gen_program(prog, PROG_LEN);
      iss = new(DMEM_WORDS, prog);
      steps = 0;
      while (!iss.step() && steps < 100_000) steps++;
      load_and_run(prog, rc);
      check(rc < 400_000, $sformatf("migration program %0d reached halt", t));
      compare(iss, $sformatf("migrate%0d", t));
      check(n_mig > 0, "instructions migrated");
      check(n_start == n_mig, $sformatf("every hand-over is a migration (%0d vs %0d)", n_start, n_mig));
      check(n_fault_any == f0, "no fault reported while migrating");
      $display("migration mask %b: %0d instructions migrated", migrate, n_mig);
    end
    check(n_mig_wrong == 0, "only selected functions migrate");
    migrate = '0;
    check(n_fault > 0,  "FDL fault detection occurred");
    check(n_wait  > 0,  "pipeline stall for the OIC occurred");
    check(n_lu    > 0,  "load-use stall occurred");
    check(n_flush > 0,  "taken-branch flush occurred");
    foreach (n_func[i])
      check(n_func[i] > 0, $sformatf("OIC served function %s", oic_func_e'(i)));
    $display("faults=%0d oic_wait_cycles=%0d loaduse=%0d flush=%0d retired=%0d",
             n_fault, n_wait, n_lu, n_flush, n_retire);
    $display("OIC functions: ADD=%0d MOV=%0d INC=%0d DEC=%0d SUB=%0d DIV=%0d",
             n_func[0], n_func[1], n_func[2], n_func[3], n_func[4], n_func[5]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
