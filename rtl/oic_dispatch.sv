// oic_dispatch: routes fault hand-overs from L conventional (MIPS) cores to
// M One Instruction Cores.
//
// The paper's configurations range from one core with one OIC (1:1) to L
// cores sharing M OICs. Its selection rule, applied here: for function j
// requested by a core, an OIC on which j is start-up strategized (enabled
// and tested before deployment, x[i][j] = 1) and which has the highest
// readiness is preferred; if there is none, an OIC on which j is merely
// available (a[i][j] = 1) is chosen and must first wake the function up. An
// OIC serves one core at a time; several cores may be served by different
// OICs at once.
//
// Hardware interpretation (this design's own choices, the paper states the
// rule only in terms of probabilities):
//   * readiness is a per-OIC saturating counter of RD_W bits, starting at
//     its maximum and decremented each time the OIC ends an operation with
//     its self-checking subtractor reporting an error; an OIC whose counter
//     reaches zero is no longer selected. Ties go to the lower OIC index.
//   * waking a function costs WAKE_CYCLES cycles before the OIC starts.
//   * an operation that ends with sc_err (the OIC abandons it) is not
//     passed to the core: the request becomes pending again and is given
//     to the best OIC then available, possibly the same one with its
//     readiness now lower. Once no OIC with the function has readiness
//     left, the request stays pending and the core stays stalled.
//   * cores are served in fixed priority (lower index first) when several
//     wait in the same cycle; a request that no OIC can serve stays pending
//     (req_pending) until one can.
//
// Interface: per core, the start pulse, function and operands from the core
// and done/result/remainder back to it. Per OIC, start/func/a/b to it and
// busy/done/result/remainder/sc_err from it. x_cfg and a_cfg are the
// start-up strategy and availability matrices (one bit per OIC and function).
// Timing: a request is granted at the earliest in the cycle after the
// core's start pulse; the OIC's done is passed to the core combinationally.
module oic_dispatch
  import mcs_pkg::*;
#(
  parameter int unsigned NUM_CORES   = 1,
  parameter int unsigned NUM_OICS    = 1,
  parameter int unsigned WAKE_CYCLES = 4,
  parameter int unsigned RD_W        = 4
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic [NUM_OICS-1:0][N_FUNCS-1:0] x_cfg,
  input  logic [NUM_OICS-1:0][N_FUNCS-1:0] a_cfg,
  // cores
  input  logic      [NUM_CORES-1:0]       c_start,
  input  oic_func_e [NUM_CORES-1:0]       c_func,
  input  logic      [NUM_CORES-1:0][XLEN-1:0] c_a,
  input  logic      [NUM_CORES-1:0][XLEN-1:0] c_b,
  output logic      [NUM_CORES-1:0]       c_done,
  output logic      [NUM_CORES-1:0][XLEN-1:0] c_result,
  output logic      [NUM_CORES-1:0][XLEN-1:0] c_remainder,
  output logic      [NUM_CORES-1:0]       req_pending,
  // OICs
  output logic      [NUM_OICS-1:0]        o_start,
  output oic_func_e [NUM_OICS-1:0]        o_func,
  output logic      [NUM_OICS-1:0][XLEN-1:0] o_a,
  output logic      [NUM_OICS-1:0][XLEN-1:0] o_b,
  input  logic      [NUM_OICS-1:0]        o_busy,
  input  logic      [NUM_OICS-1:0]        o_done,
  input  logic      [NUM_OICS-1:0][XLEN-1:0] o_result,
  input  logic      [NUM_OICS-1:0][XLEN-1:0] o_remainder,
  input  logic      [NUM_OICS-1:0]        o_sc_err,
  // observation
  output logic      [NUM_OICS-1:0][RD_W-1:0] readiness,
  output logic                            grant_strategized,  // a grant to an x=1 OIC
  output logic                            grant_wakeup,       // a grant needing wake-up
  output logic                            retry               // a failed operation is re-issued
);
  localparam int unsigned CW = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1;
  localparam int unsigned WW = $clog2(WAKE_CYCLES + 2);

  // Pending request per core.
  logic      [NUM_CORES-1:0]           pend_q;
  oic_func_e [NUM_CORES-1:0]           pfunc_q;
  logic      [NUM_CORES-1:0][XLEN-1:0] pa_q, pb_q;

  // Per-OIC binding: allocated to core owner_q, waking for wake_q cycles.
  logic [NUM_OICS-1:0]          alloc_q;
  logic [NUM_OICS-1:0][CW-1:0]  owner_q;
  logic [NUM_OICS-1:0][WW-1:0]  wake_q;
  logic [NUM_OICS-1:0]          started_q;
  logic [NUM_OICS-1:0][RD_W-1:0] rd_q;

  // Grant decision (combinational).
  logic [NUM_CORES-1:0]          g_core;
  logic [NUM_CORES-1:0][31:0]    g_oic;
  logic [NUM_CORES-1:0]          g_wake;

  always_comb begin
    logic [NUM_OICS-1:0] taken;
    int   best, best_rd;
    bit   best_x;
    taken   = alloc_q | o_busy;
    g_core  = '0;
    g_oic   = '0;
    g_wake  = '0;
    for (int c = 0; c < NUM_CORES; c++) begin
      best = -1; best_rd = -1; best_x = 1'b0;
      if (pend_q[c]) begin
        for (int i = 0; i < NUM_OICS; i++) begin
          if (!taken[i] && rd_q[i] != '0 && a_cfg[i][pfunc_q[c]]) begin
            if ((x_cfg[i][pfunc_q[c]] && !best_x) ||
                (x_cfg[i][pfunc_q[c]] == best_x && int'(rd_q[i]) > best_rd)) begin
              best    = i;
              best_rd = int'(rd_q[i]);
              best_x  = x_cfg[i][pfunc_q[c]];
            end
          end
        end
        if (best >= 0) begin
          g_core[c] = 1'b1;
          g_oic[c]  = 32'(best);
          g_wake[c] = !best_x;
          taken[best] = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_q    <= '0;
      pfunc_q   <= '{default: F_MOV};
      pa_q      <= '0;
      pb_q      <= '0;
      alloc_q   <= '0;
      owner_q   <= '0;
      wake_q    <= '0;
      started_q <= '0;
      rd_q      <= '{default: '1};
    end else begin
      for (int c = 0; c < NUM_CORES; c++) begin
        if (c_start[c]) begin
          pend_q[c]  <= 1'b1;
          pfunc_q[c] <= c_func[c];
          pa_q[c]    <= c_a[c];
          pb_q[c]    <= c_b[c];
        end else if (g_core[c]) begin
          pend_q[c] <= 1'b0;
        end
        if (g_core[c]) begin
          alloc_q[g_oic[c]]   <= 1'b1;
          owner_q[g_oic[c]]   <= CW'(c);
          wake_q[g_oic[c]]    <= g_wake[c] ? WW'(WAKE_CYCLES) : '0;
          started_q[g_oic[c]] <= 1'b0;
        end
      end
      for (int i = 0; i < NUM_OICS; i++) begin
        if (alloc_q[i]) begin
          if (wake_q[i] != '0) wake_q[i] <= wake_q[i] - WW'(1);
          else if (!started_q[i]) started_q[i] <= 1'b1;
          if (o_done[i]) begin
            alloc_q[i] <= 1'b0;
            if (o_sc_err[i]) begin
              if (rd_q[i] != '0) rd_q[i] <= rd_q[i] - RD_W'(1);
              pend_q[owner_q[i]] <= 1'b1;   // request still latched: select again
            end
          end
        end
      end
    end
  end

  // To the OICs: start once the wake-up time has passed.
  always_comb begin
    for (int i = 0; i < NUM_OICS; i++) begin
      o_start[i] = alloc_q[i] && !started_q[i] && wake_q[i] == '0;
      o_func[i]  = pfunc_q[owner_q[i]];
      o_a[i]     = pa_q[owner_q[i]];
      o_b[i]     = pb_q[owner_q[i]];
    end
  end

  // Back to the cores.
  always_comb begin
    c_done      = '0;
    c_result    = '0;
    c_remainder = '0;
    for (int i = 0; i < NUM_OICS; i++) begin
      if (alloc_q[i] && o_done[i] && !o_sc_err[i]) begin
        c_done[owner_q[i]]      = 1'b1;
        c_result[owner_q[i]]    = o_result[i];
        c_remainder[owner_q[i]] = o_remainder[i];
      end
    end
  end

  assign req_pending       = pend_q;
  assign readiness         = rd_q;
  assign grant_strategized = |(g_core & ~g_wake);
  assign grant_wakeup      = |(g_core & g_wake);
  assign retry             = |(alloc_q & o_done & o_sc_err);

  // An OIC is started only while idle, and a core waits for at most one OIC.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (o_start & o_busy) == '0);
endmodule
