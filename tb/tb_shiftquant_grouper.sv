// Self-checking test of the power-of-two channel grouper.
//
// Part 1 feeds the worked example of the ShiftQuant figure, scaled by 4 so the
// values are integers (channels (1,-2.5), (0,0.25), (0.25,-0.5), (3,-2)); the
// figure's grouping map for two groups is (0,1,1,0). Part 2 feeds random
// tensors whose channel magnitudes spread over several octaves and compares
// r_max, each channel range and each group index with a reference computed
// here from the thresholds tau_g = tau_0 * 2^-g. The clear input is also checked.
module tb_shiftquant_grouper;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  task automatic chk(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // figure instance: 2 groups, 4 channels
  logic clear1 = 0, v1 = 0;
  logic [1:0] k1 = 0;
  logic signed [15:0] d1 = 0;
  logic [15:0] rmax1, rng1 [4];
  logic [0:0]  map1 [4];
  shiftquant_grouper #(.RAW_W(16), .NG(2), .K(4)) u_fig (
    .clk(clk), .rst_n(rst_n), .clear(clear1), .in_valid(v1), .in_k(k1), .in_data(d1),
    .r_max(rmax1), .ch_range(rng1), .grp_map(map1));

  // random instance: 4 groups, 20 channels
  localparam int K2 = 20;
  logic clear2 = 0, v2 = 0;
  logic [4:0] k2 = 0;
  logic signed [15:0] d2 = 0;
  logic [15:0] rmax2, rng2 [K2];
  logic [1:0]  map2 [K2];
  shiftquant_grouper #(.RAW_W(16), .NG(4), .K(K2)) u_rnd (
    .clk(clk), .rst_n(rst_n), .clear(clear2), .in_valid(v2), .in_k(k2), .in_data(d2),
    .r_max(rmax2), .ch_range(rng2), .grp_map(map2));

  initial begin
    int fig [2][4] = '{'{4, 0, 1, 12}, '{-10, 1, -2, -8}};
    int figmap [4] = '{0, 1, 1, 0};
    int cnt_grp [4] = '{0, 0, 0, 0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int n = 0; n < 2; n++)
      for (int k = 0; k < 4; k++) begin
        v1 <= 1; k1 <= 2'(k); d1 <= 16'(fig[n][k]);
        @(posedge clk);
      end
    v1 <= 0;
    @(posedge clk);
    chk(rmax1, 12, "figure r_max");
    for (int k = 0; k < 4; k++) chk(map1[k], figmap[k], "figure grouping map");

    for (int trial = 0; trial < 6; trial++) begin
      int mx [K2];
      int rm;
      int octave [K2];
      clear2 <= 1; @(posedge clk); clear2 <= 0;
      for (int k = 0; k < K2; k++) begin
        mx[k] = 0;
        octave[k] = $urandom_range(0, 7);
      end
      rm = 0;
      for (int n = 0; n < 16; n++)
        for (int k = 0; k < K2; k++) begin
          int val;
          if (trial == 5 && k == 3) val = 0;                    // an empty channel
          else if (trial == 4 && n == 0 && k == 0) val = -32768; // most negative sample
          else val = $signed(16'($urandom_range(0, (1 << (14 - octave[k])) - 1))) *
                     (($urandom_range(0, 1) == 1) ? -1 : 1);
          if ((val < 0 ? -val : val) > mx[k]) mx[k] = (val < 0 ? -val : val);
          if (mx[k] > rm) rm = mx[k];
          v2 <= 1; k2 <= 5'(k); d2 <= 16'(val);
          @(posedge clk);
        end
      v2 <= 0;
      @(posedge clk);
      chk(rmax2, rm, "r_max");
      for (int k = 0; k < K2; k++) begin
        int g;
        real thr;
        chk(rng2[k], mx[k], "channel range");
        // reference: group g holds tau_0*2^-(g+1) < r <= tau_0*2^-g, last group below
        g = 3;
        for (int gg = 2; gg >= 0; gg--) begin
          thr = real'(rm) / real'(2 ** (gg + 1));
          if (real'(mx[k]) > thr) g = gg;
        end
        chk(map2[k], g, "group index");
        cnt_grp[g]++;
      end
    end
    for (int g = 0; g < 4; g++) chk(cnt_grp[g] > 0, 1, "every group used at least once");
    clear2 <= 1; @(posedge clk); clear2 <= 0; @(posedge clk);
    chk(rmax2, 0, "clear resets r_max");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
