// mcs_oic_harness: drives and checks one MCS-OIC instance of a given size.
// Workload testbenches instantiate several of these side by side, one per
// configuration, and add up their results.
//
// The harness owns its own clock and reset. It loads a different random
// program into each of the L cores and runs them while soft errors are
// injected into the ALUs. Each arithmetic instruction in EX is hit with
// probability INJ_PCT percent, by one flipped bit. When all cores sit on
// their final halt loop, it compares every register and the first 64 data
// words of each core with the instruction-set reference model. It repeats
// this N_PROGS times.
//
// It counts several events and reports them. The number of faults on each
// core must be non-zero. Grants to start-up strategized functions and
// grants needing a wake-up are counted. For L > M, requests that had to
// wait for a free OIC must occur. For L > 1 and M > 1, two OICs must be
// busy at once. Cycles in which two or more cores detect a fault together
// are counted in n_simul; with REQ_SIMUL set they must occur when L > 1.
// Each required event that never happens counts as a
// failure.
//
// X_CFG and A_CFG are the start-up strategy and availability matrices,
// flattened: bit i*6 + j is OIC i, function j (ADD, MOV, INC, DEC, SUB, DIV).
// done rises once all checks have been made; checks, failures and the
// counters are valid from then on.
module mcs_oic_harness
  import mcs_pkg::*;
  import mips_tb_pkg::*;
#(
  parameter int unsigned          L        = 1,
  parameter int unsigned          M        = 1,
  parameter logic [M*N_FUNCS-1:0] X_CFG    = '0,
  parameter logic [M*N_FUNCS-1:0] A_CFG    = '1,
  parameter int unsigned          N_PROGS  = 2,
  parameter int unsigned          PROG_LEN = 200,
  parameter int unsigned          INJ_PCT  = 40,
  parameter bit                   REQ_SIMUL = 1'b0
) (
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_fault,
  output int   n_gs,
  output int   n_gw,
  output int   n_wait,
  output int   n_conc,
  output int   n_simul
);
  localparam int IMEM_WORDS = 1024, DMEM_WORDS = 1024;

  logic clk = 1'b0, rst_n = 1'b0;
  logic prog_we = 1'b0;
  logic [7:0] prog_core = '0, dbg_core = '0;
  logic [31:0] prog_addr = '0, prog_data = '0;
  logic [M-1:0][N_FUNCS-1:0] x_cfg, a_cfg;
  logic [L-1:0][XLEN-1:0] alu_fault_mask = '0;
  logic [M-1:0][OW-1:0] oic_sc_flip = '0;
  logic [L-1:0][N_FUNCS-1:0] migrate_cfg = '0;
  logic [L-1:0][31:0] pc;
  logic [L-1:0] fault_detected, oic_wait, req_pending, loaduse_stall, branch_flush, retire,
                ex_arith, migrated;
  logic [M-1:0] oic_busy, oic_done, oic_sc_err;
  logic [M-1:0][2:0] oic_func;
  logic [M-1:0][3:0] readiness;
  logic grant_strategized, grant_wakeup, oic_retry;
  logic [4:0] dbg_reg = '0;
  logic [XLEN-1:0] dbg_reg_data, dbg_mdata;
  logic [31:0] dbg_maddr = '0;

  assign x_cfg = X_CFG;
  assign a_cfg = A_CFG;

  mcs_oic #(.NUM_CORES(L), .NUM_OICS(M)) dut (.*);

  always #5 clk = ~clk;

  int core_faults [L];
  logic [L-1:0] pend_d = '0;

  initial begin
    done = 1'b0; checks = 0; failures = 0;
    n_fault = 0; n_gs = 0; n_gw = 0; n_wait = 0; n_conc = 0; n_simul = 0;
    foreach (core_faults[k]) core_faults[k] = 0;
  end

  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < L; k++) begin
      if (fault_detected[k]) begin core_faults[k]++; n_fault++; end
      if (req_pending[k] && pend_d[k]) n_wait++;
    end
    pend_d <= req_pending;
    if (grant_strategized) n_gs++;
    if (grant_wakeup) n_gw++;
    if ($countones(oic_busy) >= 2) n_conc++;
    if ($countones(fault_detected) >= 2) n_simul++;
  end

  always @(negedge clk) begin
    alu_fault_mask <= '0;
    for (int k = 0; k < L; k++)
      if (rst_n && ex_arith[k] && $urandom_range(0, 99) < INJ_PCT)
        alu_fault_mask[k] <= XLEN'(1) << $urandom_range(0, XLEN - 1);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL (%0d cores, %0d OICs): %s", L, M, what);
    end
  endtask

  initial begin
    logic [31:0] prog [L][];
    mips_iss iss [L];
    int steps, run, stable;
    for (int t = 0; t < int'(N_PROGS); t++) begin
      rst_n = 1'b0;
      for (int k = 0; k < L; k++) begin
        gen_program(prog[k], PROG_LEN);
        iss[k] = new(DMEM_WORDS, prog[k]);
        steps = 0;
        while (!iss[k].step() && steps < 100_000) steps++;
        @(negedge clk);
        for (int i = 0; i < prog[k].size() + 4; i++) begin
          prog_we = 1'b1; prog_core = 8'(k); prog_addr = i;
          prog_data = (i < prog[k].size()) ? prog[k][i] : 32'h0;
          @(negedge clk);
        end
        prog_we = 1'b0;
      end
      rst_n = 1'b1;
      run = 0; stable = 0;
      while (stable < 8 && run < 400_000) begin
        bit all_done;
        @(negedge clk);
        run++;
        all_done = 1'b1;
        for (int k = 0; k < L; k++)
          if (!(pc[k] >= 32'((prog[k].size() - 1) * 4) && pc[k] <= 32'((prog[k].size() + 1) * 4)
                && !oic_wait[k])) all_done = 1'b0;
        stable = all_done ? stable + 1 : 0;
      end
      check(run < 400_000, $sformatf("programs %0d reached halt", t));
      for (int k = 0; k < L; k++) begin
        dbg_core = 8'(k);
        for (int r = 1; r < 32; r++) begin
          dbg_reg = 5'(r); #1;
          check(dbg_reg_data == iss[k].regs[r], $sformatf("prog%0d core%0d r%0d dut=%h ref=%h",
                t, k, r, dbg_reg_data, iss[k].regs[r]));
        end
        for (int m = 0; m < 64; m++) begin
          dbg_maddr = m; #1;
          check(dbg_mdata == iss[k].mem[m], $sformatf("prog%0d core%0d mem[%0d]", t, k, m));
        end
      end
    end
    for (int k = 0; k < L; k++) check(core_faults[k] > 0, $sformatf("faults on core %0d", k));
    check(n_gs > 0, "grant to a start-up strategized function");
    check(n_gw > 0, "grant with wake-up");
    if (L > M) check(n_wait > 0, "request waited for a free OIC");
    if (L > 1 && M > 1) check(n_conc > 0, "two OICs busy at once");
    if (L > 1 && REQ_SIMUL) check(n_simul > 0, "faults on two cores in the same cycle");
    $display("%0d cores + %0d OICs: faults=%0d grants strategized=%0d wakeup=%0d wait=%0d concurrent=%0d simultaneous=%0d checks=%0d failures=%0d",
             L, M, n_fault, n_gs, n_gw, n_wait, n_conc, n_simul, checks, failures);
    done = 1'b1;
  end
endmodule
