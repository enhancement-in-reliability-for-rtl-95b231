// tb_mcs_oic: end-to-end test of the MCS-OIC system (one MIPS core + one OIC)
// at its default sizes.
//
// Random programs (see mips_tb_pkg) are loaded into the instruction memory
// and run to the halt idiom, first without and then with soft errors
// injected into the ALU: whenever an FDL-checked arithmetic instruction is
// in EX, a random single-bit mask is applied with some probability. The FDL
// must catch every such error and the OIC must supply the right result, so
// the register file and data memory must match the instruction-set
// reference model exactly. A final directed phase makes the OIC's
// self-checking subtractor report an injected error: the operation must be
// abandoned, retried, and still give the right result.
//
// The OIC is configured as in the paper's one-core/one-OIC example: one
// function (ADD) start-up strategized, the others available and woken up
// when requested.
//
// Mechanisms counted (each must occur): FDL fault detection and pipeline
// stall for the OIC, OIC completion for each of the six functions ADD, MOV,
// INC, DEC, SUB, DIV, grants to a start-up strategized function and grants
// with wake-up, load-use stall, taken-branch flush, a self-checking-
// subtractor error report, the retry and the resulting drop in the OIC's
// readiness,
// and, in one program run without injected errors, the migration of all
// SUB, MOV and DIV instructions to the OIC.
module tb_mcs_oic;
  import mcs_pkg::*;
  import mips_tb_pkg::*;

  localparam int IMEM_WORDS = 1024;   // the design's default sizes
  localparam int DMEM_WORDS = 1024;
  localparam int N_PROGS    = 12;
  localparam int PROG_LEN   = 400;
  localparam int MAX_CYCLES = 2_000_000;

  logic            clk = 1'b0, rst_n = 1'b0;
  logic            prog_we = 1'b0;
  logic [7:0]      prog_core = '0, dbg_core = '0;
  // Figure 1.3(a)-style set-up: one function (ADD) start-up strategized,
  // the others available and woken up on demand.
  logic [N_FUNCS-1:0] x_cfg = N_FUNCS'(1) << F_ADD;
  logic [N_FUNCS-1:0] a_cfg = '1;
  logic            req_pending, grant_strategized, grant_wakeup, oic_retry;
  logic [3:0]      readiness;
  logic [31:0]     prog_addr = '0, prog_data = '0;
  logic [XLEN-1:0] alu_fault_mask = '0;
  logic [OW-1:0]   oic_sc_flip = '0;
  logic [N_FUNCS-1:0] migrate_cfg = '0;
  logic [31:0]     pc;
  logic            fault_detected, oic_wait, oic_busy, oic_done, oic_sc_err;
  logic            loaduse_stall, branch_flush, retire, ex_arith, migrated;
  logic [2:0]      oic_func;
  logic [4:0]      dbg_reg = '0;
  logic [XLEN-1:0] dbg_reg_data, dbg_mdata;
  logic [31:0]     dbg_maddr = '0;

  mcs_oic dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycles = 0;
  int n_fault = 0, n_wait = 0, n_gs = 0, n_gw = 0, n_lu = 0, n_flush = 0, n_scerr = 0, n_retire = 0;
  int n_func [6];
  int inject_pct = 0;
  int n_mig = 0, n_retry = 0;
  always @(posedge clk) if (rst_n && migrated) n_mig++;
  always @(posedge clk) if (rst_n && oic_retry) n_retry++;
  bit count_on = 1'b1;

  always @(posedge clk) begin
    cycles <= cycles + 1;
    if (rst_n && count_on) begin
      if (fault_detected) n_fault++;
      if (oic_wait)       n_wait++;
      if (loaduse_stall)  n_lu++;
      if (branch_flush)   n_flush++;
      if (retire)         n_retire++;
      if (grant_strategized) n_gs++;
      if (grant_wakeup)      n_gw++;
      if (oic_done) begin
        n_func[int'(oic_func)]++;
        if (oic_sc_err) n_scerr++;
      end
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

    // Migration: SUB, MOV and DIV always run on the OIC, no errors injected.
    inject_pct = 0;
    migrate_cfg = N_FUNCS'((1 << F_SUB) | (1 << F_MOV) | (1 << F_DIV));
    gen_program(prog, PROG_LEN);
    iss = new(DMEM_WORDS, prog);
    steps = 0;
    while (!iss.step() && steps < 100_000) steps++;
    load_and_run(prog, rc);
    check(rc < 400_000, "migration program reached halt");
    compare(iss, "migrate");
    migrate_cfg = '0;
    check(n_mig > 0, "instructions migrated to the OIC without a fault");

    // Directed: OIC self-checking subtractor error is reported.
    begin
      logic [31:0] p2 [];
      p2 = new [12];
      p2[0] = i_ins(6'h0D, 1, 0, 100);
      p2[1] = i_ins(6'h0D, 2, 0, 7);
      p2[2] = 32'h0; p2[3] = 32'h0; p2[4] = 32'h0;
      p2[5] = r_ins(6'h23, 3, 1, 2);            // subu r3 = 93 (faulted)
      for (int i = 6; i < 11; i++) p2[i] = 32'h0;
      p2[11] = HALT;
      inject_pct = 100;
      oic_sc_flip = OW'(1) << 4;
      // The error is transient: it goes away once reported, so the retried
      // operation on the same OIC succeeds.
      fork
        begin
          @(posedge clk iff oic_sc_err);
          @(negedge clk);
          oic_sc_flip = '0;
        end
      join_none
      load_and_run(p2, rc);
      inject_pct = 0;
      oic_sc_flip = '0;
      check(n_scerr > 0, "self-checking subtractor error reported");
      check(n_retry > 0, "failed OIC operation retried");
      dbg_reg = 5'd3; #1;
      check(dbg_reg_data == 32'd93, $sformatf("retried subu gives 93 (%0d)", dbg_reg_data));
      check(readiness == 4'd14, $sformatf("readiness lowered after the error (%0d)", readiness));
    end

    count_on = 1'b0;
    check(n_fault > 0,  "FDL fault detection occurred");
    check(n_wait  > 0,  "pipeline stall for the OIC occurred");
    check(n_lu    > 0,  "load-use stall occurred");
    check(n_flush > 0,  "taken-branch flush occurred");
    check(n_gs    > 0,  "grant to a start-up strategized OIC function occurred");
    check(n_gw    > 0,  "grant with function wake-up occurred");
    foreach (n_func[i])
      check(n_func[i] > 0, $sformatf("OIC served function %0d", i));
    $display("grants: strategized=%0d wakeup=%0d migrated=%0d", n_gs, n_gw, n_mig);
    $display("faults=%0d oic_wait_cycles=%0d loaduse=%0d flush=%0d retired=%0d scerr=%0d",
             n_fault, n_wait, n_lu, n_flush, n_retire, n_scerr);
    $display("OIC functions: ADD=%0d MOV=%0d INC=%0d DEC=%0d SUB=%0d DIV=%0d",
             n_func[0], n_func[1], n_func[2], n_func[3], n_func[4], n_func[5]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
