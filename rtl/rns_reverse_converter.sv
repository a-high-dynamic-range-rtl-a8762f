// rns_reverse_converter: residue-to-binary converter for the moduli set
// {2^n, 2^(2n)-1, 2^(2n)+1}.
//
// The three moduli are pairwise coprime; their product
// M = 2^n (2^(4n)-1) is the dynamic range (5n bits, less one value).
// From the Chinese Remainder Theorem with the inverses
// |m1^-1| = -1, |m2^-1| = |m3^-1| = 2^(n-1), the upper part of X is
//   floor(X/2^n) = | -2^(3n) R1 + (2^(3n-1)+2^(n-1)) R2
//                   + (2^(3n-1)-2^(n-1)) R3 |  modulo 2^(4n)-1
// and the lower n bits of X are R1 itself. The datapath is:
//   operand_prep  -> S1', S2, S3,1 (wires and inverters)
//   moma          -> CSA with end-around carry, then 1's complement adder
//   x = {floor(X/2^n), r1}
// All of this follows the published architecture. Leaving it purely
// combinational (no input or output registers) also follows it.
//
// Interface: combinational. r1 < 2^n, r2 < 2^(2n)-1, r3 <= 2^(2n) must
// hold; the output x is then the unique X in [0, M-1] with those residues.
module rns_reverse_converter #(
  parameter int unsigned N = rns_pkg::N_DEFAULT
) (
  input  logic [N-1:0]   r1,  // X mod 2^n
  input  logic [2*N-1:0] r2,  // X mod 2^(2n)-1
  input  logic [2*N:0]   r3,  // X mod 2^(2n)+1
  output logic [5*N-1:0] x    // X
);
  logic [4*N-1:0] s1p, s2, s31;
  logic [4*N-1:0] q;

  operand_prep #(.N(N)) u_op (
    .r1(r1), .r2(r2), .r3(r3), .s1p(s1p), .s2(s2), .s31(s31)
  );

  moma #(.N(N)) u_moma (
    .s1p(s1p), .s2(s2), .s31(s31), .q(q)
  );

  assign x = {q, r1};
endmodule
