// moma: multi-operand modular adder for the converter.
//
// Adds the three prepared 4n-bit operands S1', S2, S3,1 modulo 2^(4n)-1:
// a single 4n-bit carry-save adder with end-around carry (csa_eac) reduces
// them to two vectors, and a 4n-bit 1's complement adder
// (ones_complement_adder) adds those. The result is floor(X/2^n), a 4n-bit
// number below 2^(4n)-1. This two-stage structure is the published one.
//
// Interface: combinational; delay of one full adder plus the modular adder.
module moma #(
  parameter int unsigned N = rns_pkg::N_DEFAULT
) (
  input  logic [4*N-1:0] s1p,
  input  logic [4*N-1:0] s2,
  input  logic [4*N-1:0] s31,
  output logic [4*N-1:0] q     // floor(X / 2^n)
);
  logic [4*N-1:0] csa_sum, csa_carry;

  csa_eac #(.N(N)) u_csa (
    .a(s1p), .b(s2), .c(s31), .sum(csa_sum), .carry(csa_carry)
  );

  ones_complement_adder #(.W(4*N)) u_ma (
    .a(csa_sum), .b(csa_carry), .s(q)
  );
endmodule
