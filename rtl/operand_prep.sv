// operand_prep: operand preparation (OP) of the reverse converter.
//
// The converter computes floor(X/2^n) = |S1 + S2 + S3|  modulo 2^(4n)-1,
// where S1 = |-2^(3n) R1|, S2 = |(2^(3n-1)+2^(n-1)) R2|,
// S3 = |(2^(3n-1)-2^(n-1)) R3|. Modulo 2^(4n)-1 a multiplication by a power
// of two is a rotation and a negation is a bitwise inversion, so each term
// is just a rearrangement of residue bits, some of them inverted:
//
//   S2   = { r2[n:0], r2[2n-1:0], r2[2n-1:n+1] }                (n+1 | 2n | n-1)
//   S3,1 = { r3[n:0], (2n-1) zeros, r3[2n:n+1] }                (n+1 | 2n-1 | n)
//   S3,2 = { n ones, ~r3[2n:0], (n-1) ones }    = -2^(n-1) R3
//   S1   = { ~r1, 3n ones }                     = -2^(3n) R1
//
// The low 3n bits of S1 and the high n bits of S3,2 are all ones, so the
// low 3n bits of S3,2 are moved into S1:
//
//   S1'  = { ~r1[n-1:0], ~r3[2n:0], (n-1) ones }
//
// which leaves S3,2 all ones, i.e. zero modulo 2^(4n)-1, and it is dropped.
// Three operands remain: S1', S2, S3,1. The block is wires and 3n+1
// inverters. These bit fields follow the published derivation exactly;
// nothing here is a design choice except that n must be at least 2 (the
// (n-1)-bit fields vanish at n = 1).
//
// Interface: combinational, no clock. Inputs must be valid residues
// (r2 < 2^(2n)-1, r3 <= 2^(2n)); this is not checked.
module operand_prep #(
  parameter int unsigned N = rns_pkg::N_DEFAULT
) (
  input  logic [N-1:0]   r1,   // residue modulo 2^n
  input  logic [2*N-1:0] r2,   // residue modulo 2^(2n)-1
  input  logic [2*N:0]   r3,   // residue modulo 2^(2n)+1
  output logic [4*N-1:0] s1p,  // S1'
  output logic [4*N-1:0] s2,   // S2
  output logic [4*N-1:0] s31   // S3,1
);
  initial assert (N >= 2) else $error("operand_prep: N must be at least 2");

  always_comb begin
    s1p = {~r1, ~r3, {(N-1){1'b1}}};
    s2  = {r2[N:0], r2, r2[2*N-1:N+1]};
    s31 = {r3[N:0], {(2*N-1){1'b0}}, r3[2*N:N+1]};
  end
endmodule
