// tb_mcs_oic_fig13: the four small configurations used to explain how
// conventional cores (CC) obtain functions F1, F2, F3 from OICs. Each runs
// as its own system instance:
//   (a) 1 CC, 1 OIC; one function (F1) start-up strategized, F2 and F3
//       woken up when needed.
//   (b) 2 CCs, 4 OICs; strategized (F1,F2), F3, F1, F2 on OICs 0..3.
//   (c) 2 CCs, 4 OICs; strategized (F1,F2), F3, F2, F1 on OICs 0..3.
//   (d) 2 CCs sharing 1 OIC; requests made at the same time are served one
//       after the other.
// F1 = ADD, F2 = SUB and F3 = DIV are this testbench's choice, since the
// configurations name the functions only F1..F3. MOV, INC and DEC are
// available everywhere but never strategized.
//
// Each configuration runs random programs on both cores with ALU soft errors
// injected, and must end in the reference model's state. The harness also
// requires these events, where the configuration allows them:
//   * faults on every core, and faults on two cores in the same cycle;
//   * grants to strategized functions and grants with wake-up;
//   * OICs working in parallel in (b) and (c);
//   * a request waiting for the single OIC in (d).
module tb_mcs_oic_fig13;
  import mcs_pkg::*;

  localparam logic [N_FUNCS-1:0] F1 = N_FUNCS'(1) << F_ADD;
  localparam logic [N_FUNCS-1:0] F2 = N_FUNCS'(1) << F_SUB;
  localparam logic [N_FUNCS-1:0] F3 = N_FUNCS'(1) << F_DIV;

  // Rows are listed OIC 3 first, so OIC 0 ends up in the low bits.
  localparam logic [1*N_FUNCS-1:0] XA = F1;
  localparam logic [4*N_FUNCS-1:0] XB = {F2, F1, F3, F1 | F2};
  localparam logic [4*N_FUNCS-1:0] XC = {F1, F2, F3, F1 | F2};
  localparam logic [1*N_FUNCS-1:0] XD = F1;

  localparam int NCFG = 4;
  logic [NCFG-1:0] done;
  int c_checks [NCFG], c_fail [NCFG], nf [NCFG], ngs [NCFG], ngw [NCFG], nw [NCFG],
      nc [NCFG], ns [NCFG];

  mcs_oic_harness #(.L(1), .M(1), .X_CFG(XA), .A_CFG('1), .N_PROGS(3), .PROG_LEN(300),
                    .INJ_PCT(60), .REQ_SIMUL(1'b1)) u_a (
    .done(done[0]), .checks(c_checks[0]), .failures(c_fail[0]), .n_fault(nf[0]), .n_gs(ngs[0]),
    .n_gw(ngw[0]), .n_wait(nw[0]), .n_conc(nc[0]), .n_simul(ns[0]));
  mcs_oic_harness #(.L(2), .M(4), .X_CFG(XB), .A_CFG('1), .N_PROGS(3), .PROG_LEN(300),
                    .INJ_PCT(60), .REQ_SIMUL(1'b1)) u_b (
    .done(done[1]), .checks(c_checks[1]), .failures(c_fail[1]), .n_fault(nf[1]), .n_gs(ngs[1]),
    .n_gw(ngw[1]), .n_wait(nw[1]), .n_conc(nc[1]), .n_simul(ns[1]));
  mcs_oic_harness #(.L(2), .M(4), .X_CFG(XC), .A_CFG('1), .N_PROGS(3), .PROG_LEN(300),
                    .INJ_PCT(60), .REQ_SIMUL(1'b1)) u_c (
    .done(done[2]), .checks(c_checks[2]), .failures(c_fail[2]), .n_fault(nf[2]), .n_gs(ngs[2]),
    .n_gw(ngw[2]), .n_wait(nw[2]), .n_conc(nc[2]), .n_simul(ns[2]));
  mcs_oic_harness #(.L(2), .M(1), .X_CFG(XD), .A_CFG('1), .N_PROGS(3), .PROG_LEN(300),
                    .INJ_PCT(60), .REQ_SIMUL(1'b1)) u_d (
    .done(done[3]), .checks(c_checks[3]), .failures(c_fail[3]), .n_fault(nf[3]), .n_gs(ngs[3]),
    .n_gw(ngw[3]), .n_wait(nw[3]), .n_conc(nc[3]), .n_simul(ns[3]));

  int checks = 0, failures = 0;

  initial begin : watchdog
    #50ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (done == '1);
    for (int g = 0; g < NCFG; g++) begin
      checks += c_checks[g];
      failures += c_fail[g];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
