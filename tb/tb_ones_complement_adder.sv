// tb_ones_complement_adder: checks the modulo 2^W-1 adder.
//
// W = 8: every pair of inputs below 2^8-1 (exhaustive), plus the all-ones
// input (the second code for zero). W = 52 (n = 13): random pairs and the
// corners around the modulus. Expected value: (a + b) % (2^W - 1), which is
// never all ones. Also counts how often the end-around correction was taken.
module tb_ones_complement_adder;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;
  int wraps = 0, exact_modulus = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  localparam int unsigned WA = 52;
  localparam int unsigned WB = 8;

  logic [WA-1:0] a_a, a_b, a_s;
  logic [WB-1:0] b_a, b_b, b_s;

  ones_complement_adder #(.W(WA)) dut_a (.a(a_a), .b(a_b), .s(a_s));
  ones_complement_adder #(.W(WB)) dut_b (.a(b_a), .b(b_b), .s(b_s));

  task automatic check_one(int unsigned w, big_t a, big_t b, big_t s);
    big_t m = pow2(w) - 1;
    big_t e = (a + b) % m;
    check(s == e, $sformatf("W=%0d %0h + %0h got %0h exp %0h", w, a, b, s, e));
    if (a + b >= m) wraps++;
    if (a + b == m) exact_modulus++;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    big_t x, y, m;
    for (int i = 0; i < 256; i++)
      for (int j = 0; j < 256; j++) begin
        if (i == 255 && j == 255) continue;   // both all ones: outside the contract
        b_a = WB'(i); b_b = WB'(j);
        #1;
        check_one(WB, big_t'(i), big_t'(j), big_t'(b_s));
      end
    m = pow2(WA) - 1;
    for (int k = 0; k < 3000; k++) begin
      case (k)
        0: begin x = 0; y = 0; end
        1: begin x = m - 1; y = 1; end        // sum equals the modulus: must give 0
        2: begin x = m - 1; y = m - 1; end
        3: begin x = m; y = 5; end            // all-ones input = 0
        4: begin x = pow2(WA-1); y = pow2(WA-1) - 1; end
        default: begin x = rand_below(m); y = rand_below(m); end
      endcase
      a_a = WA'(x); a_b = WA'(y);
      #1;
      check_one(WA, x, y, big_t'(a_s));
    end
    check(wraps > 0, "end-around correction never taken");
    check(exact_modulus > 0, "sum equal to the modulus never seen");
    $display("corrections: %0d, sums equal to the modulus: %0d", wraps, exact_modulus);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
