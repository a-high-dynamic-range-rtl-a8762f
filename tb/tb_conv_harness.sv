// tb_conv_harness: drives one converter of word size N with test values of
// X and counts mismatches. Used by the multi-size workload test.
//
// When EXHAUSTIVE is set it converts every X in [0, M-1]; otherwise
// NUM_RANDOM random values of X plus 0, M-1 and X = 2^(2n). The expected
// result is X itself; the residues are formed with plain '%'. 'done' rises
// when the run is over and checks/failures hold the counts.
module tb_conv_harness #(
  parameter int unsigned N          = 2,
  parameter bit          EXHAUSTIVE = 1'b1,
  parameter int unsigned NUM_RANDOM = 1000
) (
  output logic done,
  output int   checks,
  output int   failures
);
  import tb_ref_pkg::*;

  logic [N-1:0]   r1;
  logic [2*N-1:0] r2;
  logic [2*N:0]   r3;
  logic [5*N-1:0] x;

  rns_reverse_converter #(.N(N)) dut (.r1(r1), .r2(r2), .r3(r3), .x(x));

  task automatic convert(big_t xv);
    r1 = N'(xv % m1(N));
    r2 = (2*N)'(xv % m2(N));
    r3 = (2*N+1)'(xv % m3(N));
    #1;
    checks++;
    if (big_t'(x) != xv) begin
      failures++;
      if (failures < 5) $display("FAIL n=%0d X=%0h got %0h", N, xv, x);
    end
  endtask

  initial begin
    automatic big_t mm = dyn_range(N);
    done = 1'b0;
    checks = 0;
    failures = 0;
    if (EXHAUSTIVE) begin
      for (big_t v = 0; v < mm; v++) convert(v);
    end else begin
      convert(0);
      convert(mm - 1);
      convert(pow2(2*N));
      for (int i = 0; i < NUM_RANDOM; i++) convert(rand_below(mm));
    end
    $display("n=%0d: %0d conversions, %0d wrong", N, checks, failures);
    done = 1'b1;
  end
endmodule
