// tb_mcs_oic_eval1: runs the reliability study's first evaluation example in
// hardware: three OICs that support all six functions (ADD, MOV, INC, DEC,
// SUB, DIV), with the start-up strategy of that example's best solution:
//   OIC 0: ADD, INC strategized      (bits 101000)
//   OIC 1: SUB strategized           (bits 000010)
//   OIC 2: ADD, INC, DEC, DIV        (bits 101101)
// Every other function is available on every OIC with a wake-up. The example
// does not fix the number of conventional cores; one core is used here, the
// one-core-to-many-OICs configuration.
//
// Five random programs run with ALU soft errors injected at a higher rate
// than in the other tests. Results must match the reference model. Counted
// as well: how often each OIC served a request, which must be non-zero for
// all three, and how often each of the six functions was used, which must
// also be non-zero. The cycle costs of the example's cost table are not
// checked, as this design's microprograms have their own latencies.
module tb_mcs_oic_eval1;
  import mcs_pkg::*;

  localparam int M = 3;
  // bit i*6 + j: OIC i, function j in the order ADD, MOV, INC, DEC, SUB, DIV
  localparam logic [M*N_FUNCS-1:0] X = {6'b101101, 6'b010000, 6'b000101};

  logic done;
  int   h_checks, h_fail, nf, ngs, ngw, nw, nc, ns;

  mcs_oic_harness #(.L(1), .M(M), .X_CFG(X), .A_CFG('1), .N_PROGS(5), .PROG_LEN(400),
                    .INJ_PCT(60)) u_h (
    .done, .checks(h_checks), .failures(h_fail), .n_fault(nf), .n_gs(ngs), .n_gw(ngw),
    .n_wait(nw), .n_conc(nc), .n_simul(ns)
  );

  int checks = 0, failures = 0;
  int served [M];
  int used [N_FUNCS];

  initial begin
    foreach (served[i]) served[i] = 0;
    foreach (used[j]) used[j] = 0;
  end

  always @(posedge u_h.clk)
    for (int i = 0; i < M; i++)
      if (u_h.dut.oic_done[i]) begin
        served[i]++;
        used[u_h.dut.oic_func[i]]++;
      end

  initial begin : watchdog
    #50ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (done);
    checks = h_checks;
    failures = h_fail;
    for (int i = 0; i < M; i++) begin
      checks++;
      if (served[i] == 0) begin failures++; $display("FAIL: OIC %0d never served", i); end
    end
    for (int j = 0; j < N_FUNCS; j++) begin
      checks++;
      if (used[j] == 0) begin failures++; $display("FAIL: function %0d never used", j); end
    end
    $display("served per OIC: %0d %0d %0d; functions ADD..DIV: %0d %0d %0d %0d %0d %0d",
             served[0], served[1], served[2], used[0], used[1], used[2], used[3], used[4], used[5]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
