// oic: One Instruction Core (OIC), a warm-standby helper core that emulates a
// MIPS arithmetic instruction with nothing but subleq (subtract, branch if
// the result is <= 0) steps.
//
// Operation, following the paper: when the MIPS core hands over an
// instruction, its decoded function selects a microprogram, the operands A
// and B are loaded into the registers X and Y, the OIC PC is set to the
// program's entry and the first control word is loaded into the control word
// register, all in the start cycle. In every following cycle the control
// word register drives the select lines of the multiplexers in front of the
// subtractors and one subtraction step is done. The paper gives three
// conventional subtractors and one self-checking subtractor; here the
// self-checking one performs the subleq step and decides the next PC, the
// three conventional ones perform independent subtractions in the same
// cycle. The microprograms, the extra registers Z, W, R and the 33-bit
// internal width are this design's own (see oic_cw_rom).
//
// Interface and timing:
//   start (1 cycle, while idle) with func, a, b  -> busy rises next cycle.
//   After 1 + (number of words executed) cycles done pulses for one cycle
//   with result (R) and remainder (X, meaningful for DIV).
//   Latency start->done: SUB/DEC/MOV 2, ADD/INC 3, DIV 4 + quotient cycles.
//   sc_err is high with done when the self-checking subtractor disagreed
//   with itself. The operation is then abandoned at that step (done comes
//   early and result is not valid), so a faulty subtractor cannot keep a
//   loop such as DIV's running forever; what to do on a self-check error
//   is not stated in the paper, this is this design's choice. sc_flip injects an error
//   into the self-checking subtractor's main path (tie to 0 normally).
module oic
  import mcs_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  oic_func_e       func,
  input  logic [XLEN-1:0] a,
  input  logic [XLEN-1:0] b,
  input  logic [OW-1:0]   sc_flip,
  output logic            busy,
  output logic            done,
  output logic [XLEN-1:0] result,
  output logic [XLEN-1:0] remainder,
  output logic            sc_err
);
  typedef enum logic [1:0] {ST_IDLE, ST_RUN, ST_DONE} state_e;
  state_e state;

  logic [OW-1:0]    x_q, y_q, z_q, w_q, r_q;   // OIC registers
  logic [CW_AW-1:0] pc_q;                       // OIC.PC
  oic_cw_t          cwr_q;                      // control word register
  logic             err_q;

  logic [CW_AW-1:0] entry, pc_next, rom_addr;
  oic_cw_t          rom_cw;

  // Opcode decode: microprogram entry address per function.
  always_comb begin
    unique case (func)
      F_SUB:   entry = CW_AW'(0);
      F_DEC:   entry = CW_AW'(1);
      F_MOV:   entry = CW_AW'(2);
      F_ADD:   entry = CW_AW'(3);
      F_INC:   entry = CW_AW'(5);
      F_DIV:   entry = CW_AW'(8);
      default: entry = CW_AW'(2);
    endcase
  end

  // Operand multiplexer.
  function automatic logic [OW-1:0] sel(input oic_src_e s, input logic [OW-1:0] x,
                                        input logic [OW-1:0] y, input logic [OW-1:0] z,
                                        input logic [OW-1:0] w, input logic [OW-1:0] r);
    unique case (s)
      S_X:     return x;
      S_Y:     return y;
      S_Z:     return z;
      S_W:     return w;
      S_R:     return r;
      S_ONE:   return OW'(1);
      default: return '0;
    endcase
  endfunction

  // Self-checking subtractor (subleq step).
  logic [OW-1:0] sc_a, sc_b, sc_d;
  logic          sc_leq, sc_e;
  assign sc_a = sel(cwr_q.sc.min, x_q, y_q, z_q, w_q, r_q);
  assign sc_b = sel(cwr_q.sc.sub, x_q, y_q, z_q, w_q, r_q);

  sc_subtractor #(.W(OW)) u_scsub (
    .a(sc_a), .b(sc_b), .flip(sc_flip), .diff(sc_d), .leq(sc_leq), .err(sc_e)
  );

  // Three conventional subtractors.
  logic [N_LANES-1:0][OW-1:0] lane_d;
  always_comb begin
    for (int i = 0; i < N_LANES; i++)
      lane_d[i] = sel(cwr_q.lane[i].min, x_q, y_q, z_q, w_q, r_q)
                - sel(cwr_q.lane[i].sub, x_q, y_q, z_q, w_q, r_q);
  end

  assign pc_next  = sc_leq ? cwr_q.target : pc_q + CW_AW'(1);
  assign rom_addr = (state == ST_IDLE) ? entry : pc_next;

  oic_cw_rom u_rom (.addr(rom_addr), .cw(rom_cw));

  // Register write-back of one control word.
  function automatic logic [OW-1:0] wb(input oic_dst_e d, input logic [OW-1:0] cur,
                                       input oic_cw_t cw, input logic [OW-1:0] scd,
                                       input logic [N_LANES-1:0][OW-1:0] ld);
    logic [OW-1:0] v;
    v = cur;
    if (cw.sc.we && cw.sc.dst == d) v = scd;
    for (int i = 0; i < N_LANES; i++)
      if (cw.lane[i].we && cw.lane[i].dst == d) v = ld[i];
    return v;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_IDLE;
      x_q   <= '0; y_q <= '0; z_q <= '0; w_q <= '0; r_q <= '0;
      pc_q  <= '0;
      cwr_q <= '0;
      err_q <= 1'b0;
    end else begin
      unique case (state)
        ST_IDLE: if (start) begin
          x_q   <= {1'b0, a};
          y_q   <= {1'b0, b};
          z_q   <= '0; w_q <= '0; r_q <= '0;
          pc_q  <= entry;
          cwr_q <= rom_cw;
          err_q <= 1'b0;
          state <= ST_RUN;
        end
        ST_RUN: begin
          x_q   <= wb(D_X, x_q, cwr_q, sc_d, lane_d);
          y_q   <= wb(D_Y, y_q, cwr_q, sc_d, lane_d);
          z_q   <= wb(D_Z, z_q, cwr_q, sc_d, lane_d);
          w_q   <= wb(D_W, w_q, cwr_q, sc_d, lane_d);
          r_q   <= wb(D_R, r_q, cwr_q, sc_d, lane_d);
          err_q <= err_q | sc_e;
          if (cwr_q.last || sc_e) begin
            state <= ST_DONE;          // end of program, or abort on a self-check error
          end else begin
            pc_q  <= pc_next;
            cwr_q <= rom_cw;
          end
        end
        default: state <= ST_IDLE;   // ST_DONE lasts one cycle
      endcase
    end
  end

  assign busy      = (state != ST_IDLE);
  assign done      = (state == ST_DONE);
  assign result    = r_q[XLEN-1:0];
  assign remainder = x_q[XLEN-1:0];
  assign sc_err    = err_q;

  // A control word never writes one register from two subtractors.
  property p_no_double_write;
    @(posedge clk) disable iff (!rst_n)
      (state == ST_RUN) |->
        !((cwr_q.sc.we && cwr_q.lane[0].we && cwr_q.sc.dst == cwr_q.lane[0].dst) ||
          (cwr_q.sc.we && cwr_q.lane[1].we && cwr_q.sc.dst == cwr_q.lane[1].dst) ||
          (cwr_q.sc.we && cwr_q.lane[2].we && cwr_q.sc.dst == cwr_q.lane[2].dst) ||
          (cwr_q.lane[0].we && cwr_q.lane[1].we && cwr_q.lane[0].dst == cwr_q.lane[1].dst) ||
          (cwr_q.lane[0].we && cwr_q.lane[2].we && cwr_q.lane[0].dst == cwr_q.lane[2].dst) ||
          (cwr_q.lane[1].we && cwr_q.lane[2].we && cwr_q.lane[1].dst == cwr_q.lane[2].dst));
  endproperty
  a_no_double_write: assert property (p_no_double_write);

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("oic: start while busy");
endmodule
