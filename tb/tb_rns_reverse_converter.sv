// tb_rns_reverse_converter: end-to-end test of the converter at its default
// size (n = 13: moduli 2^13, 2^26-1, 2^26+1, dynamic range
// M = 2^13 (2^52-1), a 65-bit X).
//
// Each test picks X in [0, M-1], forms its residues with plain '%', drives
// them into the converter and expects X back. Directed values cover 0,
// M-1, X < 2^n, X = 2^(2n) (r3 = 2^(2n), the residue whose top bit is
// set) and neighbours of each modulus; the rest are random.
//
// The test also counts how often each mechanism of the datapath was used,
// and fails if one never was:
//   eac      the CSA's top carry wrapped around to bit 0
//   ma_wrap  the modular adder took its end-around correction
//   ma_exact the two CSA vectors summed to exactly 2^(4n)-1 (result 0)
//   r3_top   r3 = 2^(2n) was converted
module tb_rns_reverse_converter;
  import tb_ref_pkg::*;

  localparam int unsigned N = rns_pkg::N_DEFAULT;
  localparam int unsigned NUM_RANDOM = 20000;

  int checks = 0, failures = 0;
  int n_eac = 0, n_ma_wrap = 0, n_ma_exact = 0, n_r3_top = 0;

  logic [N-1:0]   r1;
  logic [2*N-1:0] r2;
  logic [2*N:0]   r3;
  logic [5*N-1:0] x;

  rns_reverse_converter dut (.r1(r1), .r2(r2), .r3(r3), .x(x));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic convert(big_t xv);
    big_t s, c, w;
    r1 = N'(xv % m1(N));
    r2 = (2*N)'(xv % m2(N));
    r3 = (2*N+1)'(xv % m3(N));
    #1;
    check(big_t'(x) == xv, $sformatf("X=%0h got %0h (r1=%0h r2=%0h r3=%0h)", xv, x, r1, r2, r3));
    s = big_t'(dut.u_moma.csa_sum);
    c = big_t'(dut.u_moma.csa_carry);
    w = pow2(4*N) - 1;
    if (dut.u_moma.u_csa.cout[4*N-1]) n_eac++;
    if (s + c >= w) n_ma_wrap++;
    if (s + c == w) n_ma_exact++;
    if (r3[2*N]) n_r3_top++;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic big_t mm = dyn_range(N);
    convert(0);
    convert(mm - 1);
    convert(1);
    convert(m1(N) - 1);
    convert(pow2(2*N));                 // r3 = 2^(2n)
    convert(pow2(2*N) + m3(N));         // r3 = 2^(2n) again
    convert(m2(N));
    convert(m3(N));
    convert(m2(N) * m3(N));
    convert(m1(N) * m2(N));
    convert(m1(N) * m3(N));
    for (int i = 0; i < 64; i++) convert(big_t'(i));
    for (int i = 0; i < 64; i++) convert(rand_below(mm / m3(N)) * m3(N) + pow2(2*N)); // r3 = 2^(2n)
    for (int i = 0; i < NUM_RANDOM; i++) convert(rand_below(mm));
    $display("mechanisms: eac=%0d ma_wrap=%0d ma_exact=%0d r3_top=%0d",
             n_eac, n_ma_wrap, n_ma_exact, n_r3_top);
    check(n_eac > 0, "CSA end-around carry never used");
    check(n_ma_wrap > 0, "modular adder correction never used");
    check(n_ma_exact > 0, "sum equal to the modulus never seen");
    check(n_r3_top > 0, "r3 = 2^(2n) never converted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
