// tb_mcs_oic_table2: runs the thirteen core/OIC configurations of the
// power-and-area table side by side. They range from one MIPS core with one
// OIC up to eight MIPS cores with six OICs, and each has its own harness.
//
// Every configuration runs random programs on all of its cores with ALU
// soft errors injected. Each must finish with the reference model's state.
// It must also show the mechanisms its size allows:
//   * faults on every core (cycles with faults on two cores at once are
//     counted and reported);
//   * grants to start-up strategized functions and grants with wake-up;
//   * requests waiting for an OIC when cores outnumber OICs;
//   * OICs working in parallel when there are several cores and OICs.
//
// The start-up strategy is this testbench's own choice, since the table
// gives only sizes. OIC i has function (i mod 4) strategized, in the order
// ADD, MOV, INC, DEC. Every function is available on every OIC, so SUB and
// DIV always need a wake-up.
module tb_mcs_oic_table2;
  import mcs_pkg::*;

  localparam int NCFG = 13;
  localparam int CL [NCFG] = '{1, 1, 1, 2, 2, 2, 4, 4, 4, 8, 8, 8, 8};
  localparam int CM [NCFG] = '{1, 2, 4, 1, 2, 4, 1, 2, 4, 1, 2, 4, 6};

  function automatic logic [6*N_FUNCS-1:0] xpat(input int m);
    logic [6*N_FUNCS-1:0] x = '0;
    for (int i = 0; i < m; i++) x[i*N_FUNCS + (i % 4)] = 1'b1;
    return x;
  endfunction

  logic [NCFG-1:0] done;
  int checks_c [NCFG], fail_c [NCFG], nf [NCFG], ngs [NCFG], ngw [NCFG], nw [NCFG], nc [NCFG], ns [NCFG];

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    mcs_oic_harness #(
      .L(CL[g]), .M(CM[g]),
      .X_CFG(xpat(CM[g])[CM[g]*N_FUNCS-1:0]), .A_CFG('1),
      .N_PROGS(2), .PROG_LEN(200)
    ) u_h (
      .done(done[g]), .checks(checks_c[g]), .failures(fail_c[g]), .n_fault(nf[g]),
      .n_gs(ngs[g]), .n_gw(ngw[g]), .n_wait(nw[g]), .n_conc(nc[g]), .n_simul(ns[g])
    );
  end

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
      checks += checks_c[g];
      failures += fail_c[g];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
