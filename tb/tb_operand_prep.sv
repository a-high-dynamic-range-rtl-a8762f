// tb_operand_prep: checks the operand preparation against the CRT terms.
//
// For random valid residues (plus the extreme ones: zero, the largest
// residue, and r3 = 2^(2n)) it checks, modulo m4 = 2^(4n)-1, that
//   S1'  == -2^(3n) R1 - 2^(n-1) R3     (S1 with S3,2 folded in)
//   S2   ==  (2^(3n-1) + 2^(n-1)) R2
//   S3,1 ==  2^(3n-1) R3
// using plain multiplication and '%'. Runs at n = 13 and n = 2.
module tb_operand_prep;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  localparam int unsigned NA = 13;
  localparam int unsigned NB = 2;

  logic [NA-1:0] a_r1; logic [2*NA-1:0] a_r2; logic [2*NA:0] a_r3;
  logic [4*NA-1:0] a_s1p, a_s2, a_s31;
  logic [NB-1:0] b_r1; logic [2*NB-1:0] b_r2; logic [2*NB:0] b_r3;
  logic [4*NB-1:0] b_s1p, b_s2, b_s31;

  operand_prep #(.N(NA)) dut_a (.r1(a_r1), .r2(a_r2), .r3(a_r3), .s1p(a_s1p), .s2(a_s2), .s31(a_s31));
  operand_prep #(.N(NB)) dut_b (.r1(b_r1), .r2(b_r2), .r3(b_r3), .s1p(b_s1p), .s2(b_s2), .s31(b_s31));

  task automatic check_terms(int unsigned n, big_t r1, big_t r2, big_t r3,
                             big_t s1p, big_t s2, big_t s31);
    big_t m = m4(n);
    big_t e1 = (2*m - (pow2(3*n) * r1) % m - (pow2(n-1) * r3) % m) % m;
    big_t e2 = ((pow2(3*n-1) + pow2(n-1)) * r2) % m;
    big_t e3 = (pow2(3*n-1) * r3) % m;
    check(s1p % m == e1, $sformatf("n=%0d S1' r1=%0h r3=%0h got %0h", n, r1, r3, s1p));
    check(s2  % m == e2, $sformatf("n=%0d S2 r2=%0h got %0h", n, r2, s2));
    check(s31 % m == e3, $sformatf("n=%0d S3,1 r3=%0h got %0h", n, r3, s31));
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    big_t r1, r2, r3;
    // n = 2: all valid residue combinations (4 * 15 * 17)
    for (int i1 = 0; i1 < 4; i1++)
      for (int i2 = 0; i2 < 15; i2++)
        for (int i3 = 0; i3 <= 16; i3++) begin
          b_r1 = NB'(i1); b_r2 = (2*NB)'(i2); b_r3 = (2*NB+1)'(i3);
          #1;
          check_terms(NB, big_t'(i1), big_t'(i2), big_t'(i3), big_t'(b_s1p), big_t'(b_s2), big_t'(b_s31));
        end
    // n = 13: extremes then random
    for (int k = 0; k < 3000; k++) begin
      case (k)
        0: begin r1 = 0; r2 = 0; r3 = 0; end
        1: begin r1 = m1(NA) - 1; r2 = m2(NA) - 1; r3 = m3(NA) - 1; end
        2: begin r1 = 1; r2 = 1; r3 = pow2(2*NA); end
        default: begin r1 = rand_below(m1(NA)); r2 = rand_below(m2(NA)); r3 = rand_below(m3(NA)); end
      endcase
      a_r1 = NA'(r1); a_r2 = (2*NA)'(r2); a_r3 = (2*NA+1)'(r3);
      #1;
      check_terms(NA, r1, r2, r3, big_t'(a_s1p), big_t'(a_s2), big_t'(a_s31));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
