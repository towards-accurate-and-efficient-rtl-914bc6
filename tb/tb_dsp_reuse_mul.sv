// Self-checking test of the packed DSP multiplier.
//
// Three instances (4-, 6- and 8-bit operands) are driven with every operand
// combination for 4 and 6 bits and with random operands for 8 bits; each
// unpacked product is compared with the product computed directly in the
// testbench. The operand corners (most negative times most negative, where
// the borrow correction matters most) are part of the exhaustive sweeps.
module tb_dsp_reuse_mul;

  int checks = 0, failures = 0;

  logic signed [3:0]  x4 [2], y4 [2];
  logic signed [7:0]  p4 [2][2];
  logic signed [5:0]  x6 [2], y6 [2];
  logic signed [11:0] p6 [2][2];
  logic signed [7:0]  x8 [2], y8 [2];
  logic signed [15:0] p8 [2][2];

  dsp_reuse_mul #(.BITS(4)) u4 (.x(x4), .y(y4), .p(p4));
  dsp_reuse_mul #(.BITS(6)) u6 (.x(x6), .y(y6), .p(p6));
  dsp_reuse_mul #(.BITS(8)) u8 (.x(x8), .y(y8), .p(p8));

  task automatic chk(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #50_000_000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x6[1] = '0; x8[1] = '0;
    // 4-bit, four products per multiply: exhaustive
    for (int a = -8; a < 8; a++)
      for (int b = -8; b < 8; b++)
        for (int c = -8; c < 8; c++)
          for (int d = -8; d < 8; d++) begin
            x4[0] = 4'(a); x4[1] = 4'(b); y4[0] = 4'(c); y4[1] = 4'(d);
            #1;
            chk(p4[0][0], a*c, "4b x1*y1");
            chk(p4[1][0], b*c, "4b x2*y1");
            chk(p4[0][1], a*d, "4b x1*y2");
            chk(p4[1][1], b*d, "4b x2*y2");
          end
    // 6-bit, two products per multiply: exhaustive
    for (int a = -32; a < 32; a++)
      for (int c = -32; c < 32; c++)
        for (int d = -32; d < 32; d++) begin
          x6[0] = 6'(a); y6[0] = 6'(c); y6[1] = 6'(d);
          #1;
          chk(p6[0][0], a*c, "6b x*y1");
          chk(p6[0][1], a*d, "6b x*y2");
        end
    // 8-bit, two products per multiply: corners and random
    for (int t = 0; t < 20000; t++) begin
      int a, c, d;
      if (t < 8) begin
        a = (t & 1) ? -128 : 127; c = (t & 2) ? -128 : 127; d = (t & 4) ? -128 : 127;
      end else begin
        a = $signed(8'($urandom)); c = $signed(8'($urandom)); d = $signed(8'($urandom));
      end
      x8[0] = 8'(a); y8[0] = 8'(c); y8[1] = 8'(d);
      #1;
      chk(p8[0][0], a*c, "8b x*y1");
      chk(p8[0][1], a*d, "8b x*y2");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
