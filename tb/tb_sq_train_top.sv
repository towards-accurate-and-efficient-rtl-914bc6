// End-to-end test of sq_train_top at reduced sizes.
//
// Two runs of the shared test program: 6-bit operands with random result
// back-pressure (input stalls), and 4-bit operands, where the engine takes two
// rows per beat, each DSP slice computes four products and a beat takes two
// cycles, so the top still runs at one element per cycle. See top_runner for
// what is checked.
module tb_sq_train_top;

  logic d6, d4;
  int   c6, f6, c4, f4;
  int   checks, failures;

  top_runner #(.BITS(6), .M(12), .K(20), .LANES(8), .BP(1), .SEED(11)) r6 (.done(d6), .checks(c6), .failures(f6));
  top_runner #(.BITS(4), .M(8),  .K(16), .LANES(4), .BP(0), .SEED(5))  r4 (.done(d4), .checks(c4), .failures(f4));

  initial begin
    #20_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c6 + c4, f6 + f4 + 1);
    $finish;
  end

  initial begin
    wait (d6 === 1'b1 && d4 === 1'b1);
    #1;
    checks = c6 + c4;
    failures = f6 + f4;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
