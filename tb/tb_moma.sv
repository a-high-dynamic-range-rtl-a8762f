// tb_moma: checks the multi-operand modular adder.
//
// Three random 4n-bit operands shaped like the prepared ones (S1' with its
// n-1 trailing ones, S3,1 with its 2n-1 inner zeros, S2 unconstrained), at
// n = 13 and n = 2, plus corners. Expected q = (a + b + c) % (2^(4n)-1),
// computed with plain arithmetic.
module tb_moma;
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

  logic [4*NA-1:0] a_x = {{(3*NA+1){1'b0}}, {(NA-1){1'b1}}}, a_y = '0, a_z = '0, a_q;
  logic [4*NB-1:0] b_x = {{(3*NB+1){1'b0}}, {(NB-1){1'b1}}}, b_y = '0, b_z = '0, b_q;

  moma #(.N(NA)) dut_a (.s1p(a_x), .s2(a_y), .s31(a_z), .q(a_q));
  moma #(.N(NB)) dut_b (.s1p(b_x), .s2(b_y), .s31(b_z), .q(b_q));

  task automatic make_ops(int unsigned n, output big_t a, output big_t b, output big_t c);
    big_t lim = pow2(4*n);
    a = rand_below(lim) | (pow2(n-1) - 1);
    b = rand_below(lim);
    c = rand_below(lim) & ~((pow2(3*n-1) - 1) ^ (pow2(n) - 1));
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    big_t x, y, z, m;
    m = m4(NA);
    for (int k = 0; k < 4000; k++) begin
      make_ops(NA, x, y, z);
      case (k)
        0: begin x = pow2(NA-1) - 1; y = 0; z = 0; end
        1: begin x = m; y = m; z = 0; end
        2: begin x = m; y = 0; z = 0; end
        3: begin x = pow2(NA-1) - 1; y = m - (pow2(NA-1) - 1); z = 0; end  // sum = modulus
        default: ;
      endcase
      a_x = (4*NA)'(x); a_y = (4*NA)'(y); a_z = (4*NA)'(z);
      #1;
      check(big_t'(a_q) == (x + y + z) % m, $sformatf("n=13 %0h %0h %0h -> %0h", x, y, z, a_q));
    end
    m = m4(NB);
    for (int i = 0; i < 4000; i++) begin
      make_ops(NB, x, y, z);
      b_x = (4*NB)'(x); b_y = (4*NB)'(y); b_z = (4*NB)'(z);
      #1;
      check(big_t'(b_q) == (x + y + z) % m, $sformatf("n=2 %0h %0h %0h -> %0h", x, y, z, b_q));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
