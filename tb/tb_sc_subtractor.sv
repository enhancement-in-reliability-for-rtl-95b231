// tb_sc_subtractor: checks the self-checking subtractor.
//
// Random and corner operands: diff must equal a - b, leq must equal the
// signed test (a - b) <= 0, and err must stay low. With a nonzero flip
// pattern injected into the main path, err must rise.
module tb_sc_subtractor;
  localparam int W = 33;
  logic [W-1:0] a, b, flip, diff;
  logic         leq, err;
  int checks = 0, failures = 0;

  sc_subtractor #(.W(W)) dut (.*);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    logic [W-1:0] exp_d;
    logic         exp_leq;
    for (int i = 0; i < 2000; i++) begin
      case (i % 5)
        0: begin a = '0; b = W'($urandom_range(0, 3)); end
        1: begin a = W'($urandom_range(0, 3)); b = a; end
        default: begin a = {$urandom, $urandom}; b = {$urandom, $urandom}; end
      endcase
      flip = '0;
      #1;
      exp_d   = a - b;
      exp_leq = $signed(exp_d) <= 0;
      chk(diff == exp_d, $sformatf("diff %h - %h = %h", a, b, diff));
      chk(leq == exp_leq, $sformatf("leq %h - %h", a, b));
      chk(err == 1'b0, "err without fault");
      flip = W'(1) << $urandom_range(0, W - 1);
      #1;
      chk(err == 1'b1, "err with injected flip");
      chk(diff == (exp_d ^ flip), "flip reaches main path");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
