// ones_complement_adder: W-bit adder modulo 2^W-1 (1's complement adder)
// with a single representation of zero.
//
// s = |a + b| modulo 2^W-1. When a + b >= 2^W-1 the result is
// a + b - (2^W-1) = a + b + 1 - 2^W, i.e. a + b + 1 with its carry out
// dropped; otherwise it is a + b. The choice is the carry out of a + b + 1,
// which is then used as the carry-in of a + b. Unlike a plain end-around
// carry adder, a sum of exactly 2^W-1 gives zero, not all ones, so the
// output is an ordinary binary number below 2^W-1 (all ones appears only
// when both inputs are all ones).
//
// The modular adder is taken from the literature rather than designed in
// the converter's description; a parallel-prefix adder with the same
// carry-in rule gives the logarithmic delay used in the delay comparison.
// This module states the function with two '+' operators and leaves the
// adder architecture to synthesis: that is this design's own choice.
//
// Interface: combinational.
module ones_complement_adder #(
  parameter int unsigned W = 4 * rns_pkg::N_DEFAULT
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] s
);
  logic [W:0] t;    // a + b + 1, with carry out
  logic       cin;  // 1 when a + b >= 2^W - 1

  always_comb begin
    t   = {1'b0, a} + {1'b0, b} + {{W{1'b0}}, 1'b1};
    cin = t[W];
    s   = a + b + W'(cin);
    assert (s != '1 || (a == '1 && b == '1))
      else $error("ones_complement_adder: all-ones result for inputs %h %h", a, b);
  end
endmodule
