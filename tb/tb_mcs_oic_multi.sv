// tb_mcs_oic_multi: end-to-end test of an MCS-OIC with two MIPS cores and
// four OICs, set up like the paper's two-core/four-OIC example: functions
// (F1, F2), F3, F1 and F2 start-up strategized on OICs 0..3, with F1 = ADD,
// F2 = SUB, F3 = DIV here. MOV, INC and DEC are available only on OICs 2
// and 3, DIV only on OIC 1, so requests also have to wake functions
// up and sometimes wait for a free OIC.
//
// Both cores run different random programs while single-bit soft errors are
// injected into their ALUs; both must end with registers and data memory
// equal to the instruction-set reference model. Counted (each must occur):
// faults on each core, grants to strategized functions, grants with
// wake-up, a request waiting for a free OIC, and two OICs busy at once.
module tb_mcs_oic_multi;
  import mcs_pkg::*;
  import mips_tb_pkg::*;

  localparam int L = 2, M = 4;
  localparam int IMEM_WORDS = 1024, DMEM_WORDS = 1024;
  localparam int N_PROGS = 6, PROG_LEN = 400;

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

  mcs_oic #(.NUM_CORES(L), .NUM_OICS(M)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_fault [L];
  int n_gs = 0, n_gw = 0, n_waitfree = 0, n_conc = 0;
  logic [L-1:0] pend_d = '0;

  initial begin
    for (int i = 0; i < M; i++) begin x_cfg[i] = '0; a_cfg[i] = '0; end
    x_cfg[0][F_ADD] = 1; x_cfg[0][F_SUB] = 1;
    x_cfg[1][F_DIV] = 1;
    x_cfg[2][F_ADD] = 1;
    x_cfg[3][F_SUB] = 1;
    for (int i = 0; i < M; i++) begin a_cfg[i][F_ADD] = 1; a_cfg[i][F_SUB] = 1; end
    a_cfg[1][F_DIV] = 1;
    for (int i = 2; i < M; i++) begin a_cfg[i][F_MOV] = 1; a_cfg[i][F_INC] = 1; a_cfg[i][F_DEC] = 1; end
    foreach (n_fault[k]) n_fault[k] = 0;
  end

  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < L; k++) begin
      if (fault_detected[k]) n_fault[k]++;
      if (req_pending[k] && pend_d[k]) n_waitfree++;
    end
    pend_d <= req_pending;
    if (grant_strategized) n_gs++;
    if (grant_wakeup) n_gw++;
    if ($countones(oic_busy) >= 2) n_conc++;
  end

  always @(negedge clk) begin
    alu_fault_mask <= '0;
    for (int k = 0; k < L; k++)
      if (rst_n && ex_arith[k] && $urandom_range(0, 99) < 50)
        alu_fault_mask[k] <= XLEN'(1) << $urandom_range(0, XLEN - 1);
  end

  initial begin : watchdog
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [31:0] prog [L][];
    mips_iss iss [L];
    int steps, run, stable;
    for (int t = 0; t < N_PROGS; t++) begin
      rst_n = 1'b0;
      for (int k = 0; k < L; k++) begin
        gen_program(prog[k], PROG_LEN);
        iss[k] = new(DMEM_WORDS, prog[k]);
        steps = 0;
        while (!iss[k].step() && steps < 100_000) steps++;
        @(negedge clk);
        for (int i = 0; i < IMEM_WORDS; i++) begin
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
    for (int k = 0; k < L; k++) check(n_fault[k] > 0, $sformatf("faults on core %0d", k));
    check(n_gs > 0, "grant to a start-up strategized function");
    check(n_gw > 0, "grant with wake-up");
    check(n_waitfree > 0, "request waited for a free OIC");
    check(n_conc > 0, "two OICs busy at once");
    $display("faults core0=%0d core1=%0d grants strategized=%0d wakeup=%0d wait_cycles=%0d concurrent_cycles=%0d",
             n_fault[0], n_fault[1], n_gs, n_gw, n_waitfree, n_conc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
