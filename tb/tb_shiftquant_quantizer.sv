// Self-checking test of the ShiftQuant quantizer.
//
// The quantizer (6-bit codes, 4 groups) is configured with several values of
// tau_0. For each element x of group g the exact real code is
// x * B * 2^g / tau_0 (B = 31); stochastic rounding must return one of its two
// neighbouring integers. Repeating one element many times checks that the
// rounding is unbiased (the mean code approaches the exact value). Elements
// beyond their group's range check the clamp to [-B, B], a zero tau_0 checks
// the all-zero case, and random back-pressure on the output checks the
// handshake. The configuration time (BITS + F divider steps) is checked too.
module tb_shiftquant_quantizer;

  localparam int RAW_W = 16, BITS = 6, NG = 4, F = 24, QM = 31;

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
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic                    cfg_start = 0, cfg_busy, cfg_done;
  logic [RAW_W-1:0]        cfg_rmax = 0;
  logic                    in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic signed [RAW_W-1:0] in_data = 0;
  logic [1:0]              in_grp = 0;
  logic signed [BITS-1:0]  out_data;

  shiftquant_quantizer #(.RAW_W(RAW_W), .BITS(BITS), .NG(NG), .F(F)) dut (
    .clk(clk), .rst_n(rst_n), .cfg_start(cfg_start), .cfg_rmax(cfg_rmax),
    .cfg_busy(cfg_busy), .cfg_done(cfg_done), .in_valid(in_valid), .in_ready(in_ready),
    .in_data(in_data), .in_grp(in_grp), .out_valid(out_valid), .out_ready(out_ready),
    .out_data(out_data));

  // expected exact codes, in order
  real exp_q [$];
  int  rmax_cur;
  real sum_rep = 0.0;
  int  n_rep = 0;
  bit  rep_mode = 0;
  bit  bp = 0;
  int  n_up = 0, n_down = 0, n_clamp = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (out_valid && out_ready) begin
        real e;
        int lo, hi;
        e = exp_q.pop_front();
        if (e > QM) begin
          chk(out_data, QM, "clamp high"); n_clamp++;
        end else if (e < -QM) begin
          chk(out_data, -QM, "clamp low"); n_clamp++;
        end else begin
          lo = $floor(e - 1.0e-4);
          hi = $ceil(e + 1.0e-4);
          if (hi - lo > 1 && e == $floor(e)) begin lo = int'(e) - 1; hi = int'(e) + 1; end
          checks++;
          if (int'(out_data) < lo || int'(out_data) > hi) begin
            failures++;
            if (failures < 10) $display("FAIL code %0d not a neighbour of %f", out_data, e);
          end
          if (real'(out_data) > e) n_up++; else if (real'(out_data) < e) n_down++;
        end
        if (rep_mode) begin sum_rep += real'(out_data); n_rep++; end
      end
      out_ready <= bp ? ($urandom_range(0, 1) == 1) : 1'b1;
    end
  end

  task automatic configure(input int rm);
    int t;
    cfg_rmax  <= RAW_W'(rm);
    cfg_start <= 1;
    @(posedge clk);
    cfg_start <= 0;
    t = 0;
    while (!cfg_done) begin @(posedge clk); t++; end
    chk(t <= BITS + F + 2, 1, "configuration time");
    rmax_cur = rm;
    @(negedge clk);
  endtask

  // Called at a falling edge; returns at the falling edge after the element
  // was taken. in_ready only changes at rising edges, so it is sampled here.
  task automatic send(input int x, input int g);
    bit rdy;
    in_valid = 1; in_data = RAW_W'(x); in_grp = 2'(g);
    do begin
      rdy = in_ready;
      @(negedge clk);
    end while (!rdy);
    if (rmax_cur == 0) exp_q.push_back(0.0);
    else exp_q.push_back(real'(x) * real'(QM) * real'(2 ** g) / real'(rmax_cur));
    in_valid = 0;
  endtask

  initial begin
    int rms [4] = '{1000, 32767, 777, 5};
    int ub_x [4] = '{130, 77, -45, 201};
    int ub_g [4] = '{2, 0, 3, 1};
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    bp = 1;
    foreach (rms[r]) begin
      configure(rms[r]);
      for (int n = 0; n < 400; n++) begin
        int g, lim, x;
        g = $urandom_range(0, NG - 1);
        lim = rms[r] >> g;
        x = (lim == 0) ? 0 : int'($urandom_range(0, 2 * lim)) - lim;
        send(x, g);
      end
      // clamp: an element larger than its group's range
      send(rms[r] / 2 + 1, 1);
      send(-(rms[r] / 2 + 1), 1);
    end
    // unbiasedness: with tau_0 = 1000 the exact codes x*31*2^g/1000 are
    // 16.12 (x=130, g=2), 2.387 (x=77, g=0), -11.16 (x=-45, g=3) and
    // 12.462 (x=201, g=1); the mean of 3000 draws must lie within 0.05
    bp = 0;
    configure(1000);
    foreach (ub_x[u]) begin
      real ex, mean;
      ex = real'(ub_x[u]) * 31.0 * real'(2 ** ub_g[u]) / 1000.0;
      repeat (5) @(negedge clk);
      sum_rep = 0.0; n_rep = 0;
      rep_mode = 1;
      for (int n = 0; n < 3000; n++) send(ub_x[u], ub_g[u]);
      repeat (5) @(negedge clk);
      rep_mode = 0;
      mean = sum_rep / n_rep;
      checks++;
      if (mean < ex - 0.05 || mean > ex + 0.05) begin
        failures++;
        $display("FAIL biased rounding: mean %f expected %f", mean, ex);
      end
    end
    // zero tau_0
    configure(0);
    send(0, 0);
    repeat (5) @(negedge clk);
    chk(exp_q.size(), 0, "all outputs received");
    chk(n_up > 0 && n_down > 0, 1, "rounding went both ways");
    chk(n_clamp, 8, "clamped elements");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
