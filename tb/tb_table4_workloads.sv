// tb_table4_workloads: the converter at the four word sizes of the
// published area/delay comparison, n = 2, 4, 7, 13 (dynamic ranges of
// about 8, 16, 32 and 64 bits: M = 2^n (2^(4n)-1) has 5n bits).
//
// n = 2 (M = 1020) and n = 4 (M = 1,048,560) are checked exhaustively,
// n = 7 and n = 13 with random values. n = 3 is added exhaustively
// (M = 32,760) as an odd size between the published ones.
module tb_table4_workloads;
  logic d2, d3, d4, d7, d13;
  int c2, c3, c4, c7, c13;
  int f2, f3, f4, f7, f13;
  int checks = 0, failures = 0;

  tb_conv_harness #(.N(2),  .EXHAUSTIVE(1'b1))                      h2  (.done(d2),  .checks(c2),  .failures(f2));
  tb_conv_harness #(.N(3),  .EXHAUSTIVE(1'b1))                      h3  (.done(d3),  .checks(c3),  .failures(f3));
  tb_conv_harness #(.N(4),  .EXHAUSTIVE(1'b1))                      h4  (.done(d4),  .checks(c4),  .failures(f4));
  tb_conv_harness #(.N(7),  .EXHAUSTIVE(1'b0), .NUM_RANDOM(100000)) h7  (.done(d7),  .checks(c7),  .failures(f7));
  tb_conv_harness #(.N(13), .EXHAUSTIVE(1'b0), .NUM_RANDOM(100000)) h13 (.done(d13), .checks(c13), .failures(f13));

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1;
    wait (d2 && d3 && d4 && d7 && d13);
    checks   = c2 + c3 + c4 + c7 + c13;
    failures = f2 + f3 + f4 + f7 + f13;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
