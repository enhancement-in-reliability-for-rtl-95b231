// mcs_oic: multi-core system of MIPS cores supported by One Instruction Cores
// (MCS-OIC). The default, one MIPS core with one OIC, is the base
// configuration; NUM_CORES and NUM_OICS give the L-core, M-OIC
// configurations.
//
// Each MIPS core runs its own program. Its fault detection logic re-executes
// every arithmetic instruction; when the ALU result disagrees, the core
// stalls and passes the instruction's function and operands on. The
// dispatcher picks an idle OIC for that function (preferring one on which
// the function is start-up strategized, otherwise waking the function on
// one where it is available), the OIC recomputes the result with subleq
// microprograms, and the result returns into the core's MEM/WB register,
// after which the core continues. OICs are warm standbys: idle except while
// serving a faulty instruction.
//
// Interface: clock and active-low asynchronous reset; a program-load port
// (prog_core selects the core); the start-up strategy and availability
// matrices x_cfg/a_cfg (bit [i][j]: OIC i, function j in oic_func_e order);
// error-injection inputs (alu_fault_mask per core XORs into its ALU output,
// oic_sc_flip per OIC into its self-checking subtractor; zero in normal
// use); migrate_cfg, per core, the functions that core always hands to an
// OIC (migration of failure-prone instructions, zero for hand-over on faults
// only); per-core and per-OIC event outputs for observation; debug reads of
// a register and a data word of the core selected by dbg_core.
module mcs_oic
  import mcs_pkg::*;
#(
  parameter int unsigned NUM_CORES   = 1,
  parameter int unsigned NUM_OICS    = 1,
  parameter int unsigned IMEM_WORDS  = 1024,
  parameter int unsigned DMEM_WORDS  = 1024,
  parameter int unsigned WAKE_CYCLES = 4,
  parameter int unsigned RD_W        = 4
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              prog_we,
  input  logic [7:0]                        prog_core,
  input  logic [31:0]                       prog_addr,
  input  logic [31:0]                       prog_data,
  input  logic [NUM_OICS-1:0][N_FUNCS-1:0]  x_cfg,
  input  logic [NUM_OICS-1:0][N_FUNCS-1:0]  a_cfg,
  input  logic [NUM_CORES-1:0][XLEN-1:0]    alu_fault_mask,
  input  logic [NUM_OICS-1:0][OW-1:0]       oic_sc_flip,
  input  logic [NUM_CORES-1:0][N_FUNCS-1:0] migrate_cfg,
  // per core
  output logic [NUM_CORES-1:0][31:0]        pc,
  output logic [NUM_CORES-1:0]              fault_detected,
  output logic [NUM_CORES-1:0]              oic_wait,
  output logic [NUM_CORES-1:0]              req_pending,
  output logic [NUM_CORES-1:0]              loaduse_stall,
  output logic [NUM_CORES-1:0]              branch_flush,
  output logic [NUM_CORES-1:0]              retire,
  output logic [NUM_CORES-1:0]              ex_arith,
  output logic [NUM_CORES-1:0]              migrated,
  // per OIC
  output logic [NUM_OICS-1:0]               oic_busy,
  output logic [NUM_OICS-1:0]               oic_done,
  output logic [NUM_OICS-1:0][2:0]          oic_func,
  output logic [NUM_OICS-1:0]               oic_sc_err,
  output logic [NUM_OICS-1:0][RD_W-1:0]     readiness,
  output logic                              grant_strategized,
  output logic                              grant_wakeup,
  output logic                              oic_retry,
  // debug
  input  logic [7:0]                        dbg_core,
  input  logic [4:0]                        dbg_reg,
  output logic [XLEN-1:0]                   dbg_reg_data,
  input  logic [31:0]                       dbg_maddr,
  output logic [XLEN-1:0]                   dbg_mdata
);
  logic      [NUM_CORES-1:0]           c_start, c_done;
  oic_func_e [NUM_CORES-1:0]           c_func;
  logic      [NUM_CORES-1:0][XLEN-1:0] c_a, c_b, c_result, c_remainder;
  logic      [NUM_CORES-1:0][XLEN-1:0] c_dbg_reg, c_dbg_mem;

  logic      [NUM_OICS-1:0]            o_start;
  oic_func_e [NUM_OICS-1:0]            o_func;
  logic      [NUM_OICS-1:0][XLEN-1:0]  o_a, o_b, o_result, o_remainder;

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    mips_core #(.IMEM_WORDS(IMEM_WORDS), .DMEM_WORDS(DMEM_WORDS)) u_core (
      .clk, .rst_n,
      .prog_we(prog_we && prog_core == 8'(c)), .prog_addr, .prog_data,
      .alu_fault_mask(alu_fault_mask[c]), .migrate(migrate_cfg[c]),
      .oic_start(c_start[c]), .oic_func(c_func[c]), .oic_a(c_a[c]), .oic_b(c_b[c]),
      .oic_done(c_done[c]), .oic_result(c_result[c]), .oic_remainder(c_remainder[c]),
      .pc(pc[c]), .fault_detected(fault_detected[c]), .oic_wait(oic_wait[c]),
      .loaduse_stall(loaduse_stall[c]), .branch_flush(branch_flush[c]),
      .retire(retire[c]), .ex_arith(ex_arith[c]), .migrated(migrated[c]),
      .dbg_reg, .dbg_reg_data(c_dbg_reg[c]), .dbg_maddr, .dbg_mdata(c_dbg_mem[c])
    );
  end

  oic_dispatch #(
    .NUM_CORES(NUM_CORES), .NUM_OICS(NUM_OICS), .WAKE_CYCLES(WAKE_CYCLES), .RD_W(RD_W)
  ) u_dispatch (
    .clk, .rst_n, .x_cfg, .a_cfg,
    .c_start, .c_func, .c_a, .c_b, .c_done, .c_result, .c_remainder, .req_pending,
    .o_start, .o_func, .o_a, .o_b,
    .o_busy(oic_busy), .o_done(oic_done), .o_result, .o_remainder, .o_sc_err(oic_sc_err),
    .readiness, .grant_strategized, .grant_wakeup, .retry(oic_retry)
  );

  for (genvar i = 0; i < NUM_OICS; i++) begin : g_oic
    oic u_oic (
      .clk, .rst_n,
      .start(o_start[i]), .func(o_func[i]), .a(o_a[i]), .b(o_b[i]),
      .sc_flip(oic_sc_flip[i]),
      .busy(oic_busy[i]), .done(oic_done[i]),
      .result(o_result[i]), .remainder(o_remainder[i]), .sc_err(oic_sc_err[i])
    );
    assign oic_func[i] = o_func[i];
  end

  always_comb begin
    dbg_reg_data = c_dbg_reg[0];
    dbg_mdata    = c_dbg_mem[0];
    for (int c = 0; c < NUM_CORES; c++)
      if (dbg_core == 8'(c)) begin
        dbg_reg_data = c_dbg_reg[c];
        dbg_mdata    = c_dbg_mem[c];
      end
  end
endmodule
