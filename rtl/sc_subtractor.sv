// sc_subtractor: the self-checking subtractor of the One Instruction Core.
//
// The OIC has three conventional subtractors and one self-checking one; the
// self-checking one performs the subleq operation whose sign decides the
// branch. The paper names this unit but does not say how it checks itself.
// This design uses two independent, differently encoded computations of the
// difference:
//   main path   : diff  = a + ~b + 1            (two's-complement subtract)
//   check path  : chk   = ~(~a + b)             (since ~a + b = ~(a - b))
// A fault that corrupts one path makes the two disagree and raises err.
// The sign test result (diff <= 0, signed) is computed from the main path.
//
// Interface: purely combinational. a, b in; diff, leq (diff <= 0 as a
// signed W-bit number) and err out. flip is an error-injection input that
// XORs into the main path; tie it to zero in normal use.
module sc_subtractor #(
  parameter int unsigned W = mcs_pkg::OW
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] flip,
  output logic [W-1:0] diff,
  output logic         leq,
  output logic         err
);
  logic [W-1:0] main_d, chk_d;

  always_comb begin
    main_d = (a + ~b + W'(1)) ^ flip;
    chk_d  = ~(~a + b);
    diff   = main_d;
    leq    = main_d[W-1] || (main_d == '0);
    err    = (main_d != chk_d);
  end
endmodule
