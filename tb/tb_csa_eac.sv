// tb_csa_eac: checks the reduced carry-save adder with end-around carry.
//
// Operands are random except for the bits the converter holds constant
// (a[n-2:0] all ones, c[3n-2:n] all zeros). At n = 13 and n = 2 it checks
// the outputs against a plain full-adder row computed here
// (sum = a^b^c; carry bit i = majority of bit i-1, carry bit 0 = majority
// of the top bit) and the identity sum + carry == a + b + c (mod 2^(4n)-1).
// It also counts how often the end-around carry was 1.
module tb_csa_eac;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;
  int wraps = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  localparam int unsigned NA = 13;
  localparam int unsigned NB = 2;

  // Initialised so the constant bits already hold at time 0.
  logic [4*NA-1:0] a_a = {{(3*NA+1){1'b0}}, {(NA-1){1'b1}}}, a_b = '0, a_c = '0;
  logic [4*NA-1:0] a_sum, a_carry;
  logic [4*NB-1:0] b_a = {{(3*NB+1){1'b0}}, {(NB-1){1'b1}}}, b_b = '0, b_c = '0;
  logic [4*NB-1:0] b_sum, b_carry;

  csa_eac #(.N(NA)) dut_a (.a(a_a), .b(a_b), .c(a_c), .sum(a_sum), .carry(a_carry));
  csa_eac #(.N(NB)) dut_b (.a(b_a), .b(b_b), .c(b_c), .sum(b_sum), .carry(b_carry));

  // Random operands with the constant bits forced.
  task automatic make_ops(int unsigned n, output big_t a, output big_t b, output big_t c);
    big_t lim = pow2(4*n);
    big_t ones_lo = pow2(n-1) - 1;                       // bits n-2..0
    big_t zero_mid = (pow2(3*n-1) - 1) ^ (pow2(n) - 1);  // bits 3n-2..n
    a = rand_below(lim) | ones_lo;
    b = rand_below(lim);
    c = rand_below(lim) & ~zero_mid;
  endtask

  task automatic check_one(int unsigned n, big_t a, big_t b, big_t c, big_t s, big_t cy);
    int unsigned w = 4*n;
    big_t mask = pow2(w) - 1;
    big_t maj = (a & b) | (a & c) | (b & c);
    big_t exp_cy = ((maj << 1) | (maj >> (w - 1))) & mask;
    check(s == ((a ^ b ^ c) & mask), $sformatf("n=%0d sum %0h", n, s));
    check(cy == exp_cy, $sformatf("n=%0d carry %0h exp %0h", n, cy, exp_cy));
    check((s + cy) % mask == (a + b + c) % mask, $sformatf("n=%0d modular sum", n));
    if (maj[w-1]) wraps++;
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    big_t x, y, z;
    for (int k = 0; k < 4000; k++) begin
      make_ops(NA, x, y, z);
      if (k == 0) begin x = pow2(NA-1) - 1; y = 0; z = 0; end               // smallest operands
      if (k == 1) begin x = pow2(4*NA) - 1; y = pow2(4*NA) - 1;             // largest operands
                        z = (pow2(4*NA) - 1) & ~((pow2(3*NA-1) - 1) ^ (pow2(NA) - 1)); end
      a_a = (4*NA)'(x); a_b = (4*NA)'(y); a_c = (4*NA)'(z);
      make_ops(NB, x, y, z);
      b_a = (4*NB)'(x); b_b = (4*NB)'(y); b_c = (4*NB)'(z);
      #1;
      check_one(NA, big_t'(a_a), big_t'(a_b), big_t'(a_c), big_t'(a_sum), big_t'(a_carry));
      check_one(NB, big_t'(b_a), big_t'(b_b), big_t'(b_c), big_t'(b_sum), big_t'(b_carry));
    end
    check(wraps > 0, "end-around carry never exercised");
    $display("end-around carries seen: %0d", wraps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
