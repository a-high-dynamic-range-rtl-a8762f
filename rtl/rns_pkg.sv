// rns_pkg: constants shared by the residue-to-binary converter for the
// moduli set {2^n, 2^(2n)-1, 2^(2n)+1}.
//
// N_DEFAULT is the word-size parameter n used as the default of every
// module. 13 is the largest n in the published area/delay comparison
// (a 65-bit dynamic range, the "64-bit" class); any n >= 2 works.
// Widths that follow from n:
//   r1  : n      bits, residue modulo 2^n
//   r2  : 2n     bits, residue modulo 2^(2n)-1
//   r3  : 2n+1   bits, residue modulo 2^(2n)+1
//   the internal modular sum is 4n bits wide (modulo 2^(4n)-1)
//   x   : 5n     bits, 0 <= X < 2^n * (2^(4n)-1)
package rns_pkg;
  localparam int unsigned N_DEFAULT = 13;
endpackage
