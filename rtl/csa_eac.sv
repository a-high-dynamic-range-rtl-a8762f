// csa_eac: the converter's 4n-bit carry-save adder with end-around carry
// (EAC), reduced for the operands it is given.
//
// It reduces the three prepared operands a = S1', b = S2, c = S3,1 to a sum
// vector and a carry vector with sum + carry == a + b + c (mod 2^(4n)-1).
// Bit i of the carry vector is the carry out of bit i-1; the carry out of
// the top bit weighs 2^(4n) = 1 (mod 2^(4n)-1) and re-enters at bit 0.
//
// Two ranges of bit positions have a constant input, so their full adders
// shrink (bit 0 is the least significant):
//   bits 0 .. n-2      a[i] = 1 (the (n-1) trailing ones of S1'):
//                      sum = XNOR(b, c), carry = OR(b, c)     n-1 XNOR/OR pairs
//   bits n .. 3n-2     c[i] = 0 (the (2n-1) zeros inside S3,1):
//                      sum = XOR(a, b),  carry = AND(a, b)    2n-1 XOR/AND pairs
//   bit n-1 and bits 3n-1 .. 4n-1:
//                      full adders                            n+2 FAs
// These counts are the published hardware budget of the CSA. The constant
// inputs are not used by the logic; an assertion checks that they hold.
//
// Interface: combinational, one full-adder delay.
module csa_eac #(
  parameter int unsigned N = rns_pkg::N_DEFAULT
) (
  input  logic [4*N-1:0] a,      // S1'  : bits n-2..0 are ones
  input  logic [4*N-1:0] b,      // S2
  input  logic [4*N-1:0] c,      // S3,1 : bits 3n-2..n are zeros
  output logic [4*N-1:0] sum,
  output logic [4*N-1:0] carry   // already rotated: carry[0] is the end-around carry
);
  localparam int unsigned W = 4 * N;

  typedef enum logic [1:0] {CELL_FA, CELL_XNOR_OR, CELL_XOR_AND} cell_e;

  function automatic cell_e cell_at(int unsigned i);
    if (i <= N - 2)                return CELL_XNOR_OR;
    else if (i >= N && i <= 3*N-2) return CELL_XOR_AND;
    else                           return CELL_FA;
  endfunction

  logic [W-1:0] cout;  // carry out of each bit position

  for (genvar i = 0; i < W; i++) begin : g_bit
    if (cell_at(i) == CELL_XNOR_OR) begin : g_xnor_or
      always_comb begin
        sum[i]  = ~(b[i] ^ c[i]);
        cout[i] = b[i] | c[i];
      end
    end else if (cell_at(i) == CELL_XOR_AND) begin : g_xor_and
      always_comb begin
        sum[i]  = a[i] ^ b[i];
        cout[i] = a[i] & b[i];
      end
    end else begin : g_fa
      always_comb begin
        sum[i]  = a[i] ^ b[i] ^ c[i];
        cout[i] = (a[i] & b[i]) | (a[i] & c[i]) | (b[i] & c[i]);
      end
    end
  end

  assign carry = {cout[W-2:0], cout[W-1]};

  always_comb begin
    assert (a[N-2:0] == '1 && c[3*N-2:N] == '0)
      else $error("csa_eac: constant operand bits violated (a=%h c=%h)", a, c);
  end
endmodule
