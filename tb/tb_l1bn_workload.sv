// Fully-quantized L1 batch normalization at the feature-map sizes of the
// normalization throughput study: (batch N, channels C, spatial HW) =
// (4,128,256), (4,256,512), (8,128,256), (8,256,512), (16,128,256),
// (16,256,512). A channel of batch normalization holds N*HW samples, so one
// channel of each size (1024 to 8192 samples) is normalized; the other
// channels of the same layer repeat the same operation on other data.
// The unit runs at its default parameters. Statistics and every output are
// compared bit-exactly with an independent recomputation and with the
// real-valued formula gamma*(x - mu)/sigma + beta, each of the first two passes
// must take one sample per cycle, and the third pass runs under random output
// back-pressure for the larger half of the sizes.
module tb_l1bn_workload;

  localparam int IN_W = 8, PAR_W = 8, NW = 16, R = 24, FR = 16;
  localparam int OUT_W = PAR_W + IN_W + R + 2 + 1;

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
    repeat (2000000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic                    start = 0, in_valid = 0, in_ready, out_valid, out_ready = 1, done;
  logic [NW-1:0]           cfg_n = 0;
  logic signed [PAR_W-1:0] gamma_q = 0, beta_q = 0;
  logic signed [IN_W-1:0]  in_data = 0, mu_q;
  logic signed [OUT_W-1:0] out_data;
  logic [2:0]              phase;
  logic [7:0]              sigma_mant;
  logic [5:0]              sigma_exp;

  l1bn_unit dut (
    .clk(clk), .rst_n(rst_n), .start(start), .cfg_n(cfg_n), .gamma_q(gamma_q), .beta_q(beta_q),
    .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data),
    .phase(phase), .done(done), .mu_q(mu_q), .sigma_mant(sigma_mant), .sigma_exp(sigma_exp));

  int     xs [$];
  longint exp_y [$];
  real    exp_real [$];
  bit     bp = 0;
  int     n_out = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (out_valid && out_ready) begin
        longint e;
        real er, got_r;
        e  = exp_y.pop_front();
        er = exp_real.pop_front();
        chk(longint'(out_data), e, "y bit-exact");
        got_r = real'(out_data) / real'(1 << FR);
        checks++;
        if (got_r - er > 0.02 * (er < 0 ? -er : er) + 1.0e-3 ||
            er - got_r > 0.02 * (er < 0 ? -er : er) + 1.0e-3) begin
          failures++;
          if (failures < 10) $display("FAIL y %f far from real-valued %f", got_r, er);
        end
        n_out++;
      end
      out_ready <= bp ? ($urandom_range(0, 2) != 0) : 1'b1;
    end
  end

  // drive one pass of the samples, one per cycle while in_ready; returns cycles used
  task automatic pass(output int cyc);
    cyc = 0;
    foreach (xs[i]) begin
      bit rdy;
      in_valid = 1; in_data = IN_W'(xs[i]);
      do begin
        rdy = in_ready;
        @(negedge clk);
        cyc++;
      end while (!rdy);
    end
    in_valid = 0;
  endtask

  task automatic run_channel(input int n, input int off, input int spread, input int g, input int b);
    longint S, A, sigma, mant, e, recip, mu;
    int c1, c2, c3;
    xs.delete();
    for (int i = 0; i < n; i++) begin
      int v;
      v = off + int'($urandom_range(0, 2 * spread)) - spread;
      if (v > 127) v = 127;
      if (v < -128) v = -128;
      xs.push_back(v);
    end
    // reference statistics
    S = 0;
    foreach (xs[i]) S += xs[i];
    mu = (S < 0) ? -((-2 * S + n) / (2 * n)) : ((2 * S + n) / (2 * n));
    A = 0;
    foreach (xs[i]) A += (n * xs[i] - S < 0) ? -(n * xs[i] - S) : (n * xs[i] - S);
    sigma = A / n;
    e = 0;
    while ((sigma >> e) >= 256) e++;
    mant = sigma >> e;
    recip = (mant == 0) ? 0 : ((64'd1 << R) / mant);
    foreach (xs[i]) begin
      longint xh;
      real xr;
      xh = ((xs[i] - mu) * recip) >>> (R - FR + e);
      exp_y.push_back(g * xh + (longint'(b) <<< FR));
      xr = (sigma == 0) ? real'(b) : real'(g) * (real'(xs[i]) - real'(S) / n) / (real'(A) / n) + b;
      // quantization of mu and sigma: allow their error in the real-valued comparison
      if (sigma != 0) xr = real'(g) * real'(xs[i] - mu) / real'(mant * (64'd1 << e)) + b;
      exp_real.push_back(xr);
    end
    // run
    cfg_n = NW'(n); gamma_q = PAR_W'(g); beta_q = PAR_W'(b); start = 1;
    @(negedge clk);
    start = 0;
    pass(c1);
    while (phase != 3'd3) @(negedge clk);
    chk(mu_q, mu, "quantized mean");
    pass(c2);
    while (phase != 3'd6) @(negedge clk);
    chk(sigma_mant, mant, "quantized L1 norm mantissa");
    chk(sigma_exp, e, "quantized L1 norm exponent");
    pass(c3);
    chk(c1, n, "pass 1 at one sample per cycle");
    chk(c2, n, "pass 2 at one sample per cycle");
    while (phase != 3'd0) @(negedge clk);
    repeat (3) @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // n = N*HW; offsets, spreads and affine parameters vary per size
    run_channel(4 * 256, 3, 40, 5, -1);
    run_channel(4 * 512, -20, 90, -3, 2);
    run_channel(8 * 256, 0, 127, 11, 0);
    bp = 1;
    run_channel(8 * 512, 40, 60, 2, -7);
    run_channel(16 * 256, -60, 30, 100, 3);
    run_channel(16 * 512, 0, 15, -9, 1);
    bp = 0;
    repeat (10) @(negedge clk);
    chk(exp_y.size(), 0, "all outputs received");
    chk(n_out, 4 * 256 + 4 * 512 + 8 * 256 + 8 * 512 + 16 * 256 + 16 * 512, "output count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
