// tb_oic: checks the One Instruction Core on its own.
//
// Every function (ADD, MOV, INC, DEC, SUB, DIV) is run with random and
// corner operands; the result (and remainder for DIV) is compared with
// values computed here, and the start-to-done latency is checked against the
// microprogram lengths: 2 cycles for SUB, DEC, MOV, 3 for ADD, INC and
// 4 + quotient for DIV. busy must be high from the cycle after start until
// done. A run with an error injected into the self-checking subtractor must
// be abandoned at its first step, so done (with sc_err) comes as early as
// for a one-word program; sc_err must be clear otherwise.
module tb_oic;
  import mcs_pkg::*;
  logic            clk = 1'b0, rst_n = 1'b0;
  logic            start = 1'b0;
  oic_func_e       func = F_ADD;
  logic [XLEN-1:0] a = '0, b = '0;
  logic [OW-1:0]   sc_flip = '0;
  logic            busy, done, sc_err;
  logic [XLEN-1:0] result, remainder;
  int checks = 0, failures = 0;

  oic dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  task automatic run(input oic_func_e f, input logic [XLEN-1:0] x, input logic [XLEN-1:0] y,
                     input bit inject);
    logic [XLEN-1:0] er, em;
    int exp_lat, lat;
    em = '0;
    case (f)
      F_ADD: begin er = x + y;      exp_lat = 3; end
      F_MOV: begin er = x;          exp_lat = 2; end
      F_INC: begin er = x + 1;      exp_lat = 3; end
      F_DEC: begin er = x - 1;      exp_lat = 2; end
      F_SUB: begin er = x - y;      exp_lat = 2; end
      default: begin
        er = (y == 0) ? '1 : x / y;
        em = (y == 0) ? x : x % y;
        exp_lat = (y == 0) ? 3 : 4 + int'(x / y);
      end
    endcase
    @(negedge clk);
    start = 1'b1; func = f; a = x; b = y;
    sc_flip = inject ? OW'(1) << $urandom_range(0, OW - 1) : '0;
    @(negedge clk);
    start = 1'b0;
    lat = 1;
    while (!done && lat < 100000) begin
      chk(busy, "busy while working");
      @(negedge clk);
      lat++;
    end
    sc_flip = '0;
    if (!inject) begin
      chk(result == er, $sformatf("%s %h,%h -> %h exp %h", f.name(), x, y, result, er));
      if (f == F_DIV) chk(remainder == em, $sformatf("DIV rem %h,%h -> %h exp %h", x, y,
                                                     remainder, em));
      chk(lat == exp_lat, $sformatf("%s latency %0d exp %0d", f.name(), lat, exp_lat));
      chk(!sc_err, "sc_err without injection");
    end else begin
      chk(sc_err, $sformatf("%s sc_err with injection", f.name()));
      chk(lat == 2, $sformatf("%s abandoned at the first step (latency %0d)", f.name(), lat));
    end
    @(negedge clk);
    chk(!busy && !done, "idle after done");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 300; i++) begin
      run(F_ADD, $urandom, $urandom, 0);
      run(F_SUB, $urandom, $urandom, 0);
      run(F_MOV, $urandom, $urandom, 0);
      run(F_INC, (i == 0) ? '1 : $urandom, '0, 0);
      run(F_DEC, (i == 0) ? '0 : $urandom, '0, 0);
      run(F_DIV, XLEN'($urandom_range(0, 3000)), XLEN'($urandom_range(1, 200)), 0);
    end
    run(F_DIV, 32'hFFFF_FFFF, 32'hFFFF_FFFF, 0);   // unsigned: quotient 1
    run(F_DIV, 32'hFFFF_FFF0, 32'h8000_0000, 0);   // quotient 1, big remainder
    run(F_DIV, 32'd5, 32'd7, 0);                   // quotient 0
    run(F_DIV, 32'd35, 32'd1, 0);                  // quotient 35
    run(F_DIV, 32'd1234, 32'd0, 0);                // divide by zero
    run(F_SUB, 32'd0, 32'hFFFF_FFFF, 0);
    run(F_ADD, 32'hFFFF_FFFF, 32'd1, 0);
    run(F_ADD, $urandom, $urandom, 1);
    run(F_SUB, $urandom, $urandom, 1);
    run(F_DIV, 32'd100, 32'd9, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
