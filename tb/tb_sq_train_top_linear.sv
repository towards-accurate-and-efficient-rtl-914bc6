// End-to-end test of sq_train_top, at its default size, on linear layers of
// the CPU throughput study whose inner dimension fits the built K = 288:
//   input (4,128,256) x weight (256,512): A is 512 x 256
//   input (8,128,256) x weight (256,512): A is 1024 x 256
// Each layer needs 512/32 = 16 operations, one per 32-column slice of the
// weight; one slice is run here (the others differ only in the weight data).
// A is zero-padded to 1024 rows and 288 channels. The padded channels must land
// in the last group and add nothing to C, which the bit-exact and real-valued
// checks of top_runner confirm. Both tops use every parameter at its default.
module tb_sq_train_top_linear;

  logic d1, d2;
  int   c1, f1, c2, f2;

  top_runner #(.BITS(6), .M(1024), .K(288), .LANES(32), .BP(0), .FULL(1), .SEED(21),
               .MU(4 * 128), .KU(256)) r1 (.done(d1), .checks(c1), .failures(f1));
  top_runner #(.BITS(6), .M(1024), .K(288), .LANES(32), .BP(0), .FULL(1), .SEED(22),
               .MU(8 * 128), .KU(256)) r2 (.done(d2), .checks(c2), .failures(f2));

  initial begin
    #200_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c1 + c2, f1 + f2 + 1);
    $finish;
  end

  initial begin
    wait (d1 === 1'b1 && d2 === 1'b1);
    #1;
    $display("TB_RESULT checks=%0d failures=%0d", c1 + c2, f1 + f2);
    $finish;
  end

endmodule
