// tb_oic_dispatch: checks the OIC dispatcher with 3 cores and 4 behavioural
// OICs.
//
// Phase 1, one request at a time: for random start-up strategy and
// availability matrices and random readiness histories, the OIC that is
// started must be the one a reference selection written here picks
// (strategized before available-only, then highest readiness, then lowest
// index), it must start 2 cycles after the request when the function is
// strategized and 2 + WAKE_CYCLES cycles after when it must be woken, the
// core must get back that OIC's result, and an OIC whose operation ends with
// sc_err must lose one step of readiness, its result must not reach the
// core, and the request must be re-issued to the OIC the rule picks next.
// One OIC is driven down to readiness 0 and must then never be selected.
// Phase 2, concurrent requests from all cores: every request completes with
// its own result and no OIC is ever started while busy.
module tb_oic_dispatch;
  import mcs_pkg::*;
  localparam int L = 3, M = 4, WAKE = 4, RDW = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [M-1:0][N_FUNCS-1:0] x_cfg = '0, a_cfg = '0;
  logic      [L-1:0]           c_start = '0;
  oic_func_e [L-1:0]           c_func = '{default: F_ADD};
  logic      [L-1:0][XLEN-1:0] c_a = '0, c_b = '0;
  logic      [L-1:0]           c_done, req_pending;
  logic      [L-1:0][XLEN-1:0] c_result, c_remainder;
  logic      [M-1:0]           o_start, o_busy = '0, o_done = '0, o_sc_err = '0;
  oic_func_e [M-1:0]           o_func;
  logic      [M-1:0][XLEN-1:0] o_a, o_b, o_result = '0, o_remainder = '0;
  logic      [M-1:0][RDW-1:0]  readiness;
  logic                        grant_strategized, grant_wakeup, retry;

  oic_dispatch #(.NUM_CORES(L), .NUM_OICS(M), .WAKE_CYCLES(WAKE), .RD_W(RDW)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int rd_ref [M];
  bit err_next [M];
  int n_retry = 0;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Behavioural OICs: busy for 2..6 cycles after start, result = a - b + i
  // (the OIC index makes the routing visible), optional sc_err.
  for (genvar i = 0; i < M; i++) begin : g_model
    initial begin
      logic [XLEN-1:0] x, y;
      forever begin
        @(posedge clk);
        if (o_start[i]) begin
          chk(!o_busy[i], "start while busy");
          x = o_a[i]; y = o_b[i];
          #1 o_busy[i] = 1'b1;
          repeat ($urandom_range(1, 5)) @(posedge clk);
          #1;
          o_done[i] = 1'b1; o_result[i] = x - y + XLEN'(i); o_remainder[i] = x;
          o_sc_err[i] = err_next[i];
          err_next[i] = 1'b0;
          @(posedge clk);
          #1 o_done[i] = 1'b0; o_busy[i] = 1'b0; o_sc_err[i] = 1'b0;
        end
      end
    end
  end

  function automatic int ref_pick(input oic_func_e f, output bit wake);
    int best = -1, best_rd = -1; bit best_x = 0;
    for (int i = 0; i < M; i++)
      if (a_cfg[i][f] && rd_ref[i] > 0) begin
        if ((x_cfg[i][f] && !best_x) || (x_cfg[i][f] == best_x && rd_ref[i] > best_rd)) begin
          best = i; best_rd = rd_ref[i]; best_x = x_cfg[i][f];
        end
      end
    wake = !best_x;
    return best;
  endfunction

  initial begin
    int exp_i, got_i, lat, c, n_cand;
    bit wake, had_err;
    oic_func_e f;
    foreach (rd_ref[i]) begin rd_ref[i] = (1 << RDW) - 1; err_next[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // Phase 1
    for (int t = 0; t < 400; t++) begin
      for (int i = 0; i < M; i++) begin
        x_cfg[i] = N_FUNCS'($urandom);
        a_cfg[i] = N_FUNCS'($urandom) | x_cfg[i];
      end
      f = oic_func_e'($urandom_range(0, N_FUNCS - 1));
      exp_i = ref_pick(f, wake);
      if (exp_i < 0) continue;
      // OIC M-1 fails whenever it runs, as long as another OIC could take
      // over, and is driven down to readiness 0, after which it must never
      // be picked again; the others fail now and then but keep some
      // readiness. A failed operation must not reach the core and must be
      // re-issued to the OIC the selection rule picks next.
      n_cand = 0;
      for (int i = 0; i < M; i++) if (a_cfg[i][f] && rd_ref[i] > 0) n_cand++;
      foreach (err_next[i])
        err_next[i] = (i == M - 1) ? (n_cand >= 2) : ((t % 9 == 0) && (rd_ref[i] > 2));
      c = $urandom_range(0, L - 1);
      @(negedge clk);
      c_start[c] = 1'b1; c_func[c] = f; c_a[c] = $urandom; c_b[c] = $urandom;
      @(negedge clk);
      c_start[c] = 1'b0;
      lat = 1;
      forever begin
        got_i = -1;
        while (got_i < 0 && lat < 50) begin
          for (int i = 0; i < M; i++) if (o_start[i]) got_i = i;
          if (got_i < 0) begin @(negedge clk); lat++; end
        end
        chk(got_i == exp_i, $sformatf("t%0d f=%s picked OIC %0d, expected %0d", t, f.name(),
                                      got_i, exp_i));
        chk(lat == (wake ? 2 + WAKE : 2), $sformatf("start latency %0d (wake=%0b)", lat, wake));
        if (got_i < 0) break;
        chk(o_func[got_i] == f && o_a[got_i] == c_a[c] && o_b[got_i] == c_b[c], "operands routed");
        had_err = err_next[got_i];
        while (!o_done[got_i]) @(negedge clk);
        if (!had_err) begin
          chk(c_done[c], "done passed to the core");
          chk(c_result[c] == c_a[c] - c_b[c] + XLEN'(got_i), "result routed back to the core");
          break;
        end
        chk(!c_done[c], "failed operation not passed to the core");
        chk(retry, "retry reported");
        n_retry++;
        rd_ref[got_i]--;
        exp_i = ref_pick(f, wake);
        lat = 0;
      end
      @(negedge clk);
      for (int i = 0; i < M; i++)
        chk(int'(readiness[i]) == rd_ref[i], $sformatf("readiness[%0d]=%0d exp %0d", i,
                                                      readiness[i], rd_ref[i]));
    end

    chk(n_retry > 0, "failed operations were retried");
    chk(rd_ref[M-1] == 0, $sformatf("OIC %0d reached readiness 0 (%0d)", M - 1, rd_ref[M-1]));

    // Phase 2: all cores at once, every function available everywhere.
    foreach (err_next[i]) err_next[i] = 0;
    x_cfg = '0; a_cfg = '1;
    for (int t = 0; t < 100; t++) begin
      logic [L-1:0] got;
      logic [L-1:0][XLEN-1:0] ea, eb;
      @(negedge clk);
      for (int k = 0; k < L; k++) begin
        c_start[k] = 1'b1; c_func[k] = oic_func_e'($urandom_range(0, N_FUNCS - 1));
        c_a[k] = $urandom; c_b[k] = $urandom; ea[k] = c_a[k]; eb[k] = c_b[k];
      end
      if (t % 2 == 0) x_cfg = {M{N_FUNCS'($urandom)}};
      @(negedge clk);
      c_start = '0;
      got = '0; lat = 0;
      while (got != '1 && lat < 100) begin
        for (int k = 0; k < L; k++)
          if (c_done[k]) begin
            got[k] = 1'b1;
            chk((c_result[k] - (ea[k] - eb[k])) < XLEN'(M), $sformatf("core %0d result", k));
          end
        @(negedge clk); lat++;
      end
      chk(got == '1, "all concurrent requests served");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
