// End-to-end test of sq_train_top at its default size: one complete
// 1024 x 288 x 32 ShiftQuant + ShiftMM operation with 6-bit operands and four
// groups (the matrix size of the paper's FPGA evaluation), followed by one L1
// normalization channel. The top is instantiated with no parameter overrides.
// See top_runner for what is checked.
module tb_sq_train_top_full;

  logic d;
  int   c, f;

  top_runner #(.BITS(6), .M(1024), .K(288), .LANES(32), .BP(0), .FULL(1), .SEED(3)) r (.done(d), .checks(c), .failures(f));

  initial begin
    #100_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c, f + 1);
    $finish;
  end

  initial begin
    wait (d === 1'b1);
    #1;
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
    $finish;
  end

endmodule
