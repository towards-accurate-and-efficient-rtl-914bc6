// End-to-end test program for sq_train_top, shared by the reduced-size and the
// full-size testbenches.
//
// One run: load random weights B, stream a random high-precision operand A
// (its channels spread over several octaves so that every ShiftQuant group is
// used) twice through the top, collect all result rows, and normalize one
// channel with the L1 unit. Checked against references computed here:
//  * r_max, and every channel's group, from the power-of-two thresholds;
//  * every quantized code is a neighbour of its exact scaled value (the codes
//    are observed on the quantizer's output, since stochastic rounding draws
//    from the design's own random source);
//  * every C entry bit-exactly equals sum_k q*B << (NG-1-m[k]) of those codes;
//  * every dequantized C entry is within the rounding bound of the exact real
//    product A*B;
//  * the L1 normalization statistics and outputs, bit-exactly;
//  * the cycle count of the quantize-and-multiply phase when nothing stalls.
// Mechanisms are counted and a failure is recorded for any that never
// happened: use of each group, rounding up and down, input stalls caused by
// result back-pressure (only with BP = 1), and two-row beats (only BITS = 4).
// FULL = 1 instantiates the top with no parameter overrides (all defaults).
// MU and KU below M and K model a smaller layer zero-padded to the built size:
// the padding rows and channels of A are zero (padded channels fall in the
// last group and contribute nothing).
module top_runner #(
  parameter int  BITS  = 6,
  parameter int  M     = 8,
  parameter int  K     = 12,
  parameter int  LANES = 4,
  parameter bit  BP    = 0,
  parameter bit  FULL  = 0,
  parameter int  SEED  = 1,
  parameter int  MU    = M,     // rows of A that hold data; the rest are zero padding
  parameter int  KU    = K      // channels of A that hold data; the rest are zero padding
) (
  output logic done,
  output int   checks,
  output int   failures
);

  localparam int NG = 4, RAW_W = 16, F = 24;
  localparam int ROWS = (BITS <= 4) ? 2 : 1;
  localparam int ACC_W = 2*BITS + (NG - 1) + $clog2(K) + 1;
  localparam int KW = (K > 1) ? $clog2(K) : 1;
  localparam int QM = (1 << (BITS - 1)) - 1;
  localparam int BN_OUT_W = 8 + 8 + 24 + 2 + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  task automatic chk(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL [%0d-bit] %s: got %0d expected %0d", BITS, what, got, exp);
    end
  endtask

  // DUT signals
  logic                    w_we = 0;
  logic [KW-1:0]           w_k = 0;
  logic signed [BITS-1:0]  w_row [LANES];
  logic                    op_start = 0, op_busy, op_done;
  logic [1:0]              op_phase;
  logic                    raw_valid = 0, raw_ready;
  logic signed [RAW_W-1:0] raw_data = 0;
  logic                    c_valid, c_ready = 1;
  logic signed [ACC_W-1:0] c_row [ROWS][LANES];
  logic [RAW_W-1:0]        r_max;
  logic [1:0]              grp_map [K];
  logic                    bn_start = 0, bn_in_valid = 0, bn_in_ready, bn_out_valid, bn_out_ready = 1, bn_done;
  logic [15:0]             bn_n = 0;
  logic signed [7:0]       bn_gamma = 0, bn_beta = 0, bn_in_data = 0, bn_mu_q;
  logic signed [BN_OUT_W-1:0] bn_out_data;
  logic [7:0]              bn_sigma_mant;
  logic [5:0]              bn_sigma_exp;

  if (FULL) begin : g_full
    sq_train_top u_top (
      .clk, .rst_n, .w_we, .w_k, .w_row, .op_start, .op_busy, .op_done, .op_phase,
      .raw_valid, .raw_ready, .raw_data, .c_valid, .c_ready, .c_row, .r_max, .grp_map,
      .bn_start, .bn_n, .bn_gamma, .bn_beta, .bn_in_valid, .bn_in_ready, .bn_in_data,
      .bn_out_valid, .bn_out_ready, .bn_out_data, .bn_done, .bn_mu_q, .bn_sigma_mant,
      .bn_sigma_exp);
  end else begin : g_red
    sq_train_top #(.BITS(BITS), .M(M), .K(K), .LANES(LANES)) u_top (
      .clk, .rst_n, .w_we, .w_k, .w_row, .op_start, .op_busy, .op_done, .op_phase,
      .raw_valid, .raw_ready, .raw_data, .c_valid, .c_ready, .c_row, .r_max, .grp_map,
      .bn_start, .bn_n, .bn_gamma, .bn_beta, .bn_in_valid, .bn_in_ready, .bn_in_data,
      .bn_out_valid, .bn_out_ready, .bn_out_data, .bn_done, .bn_mu_q, .bn_sigma_mant,
      .bn_sigma_exp);
  end

  // quantizer output, observed inside the top
  logic                   q_fire;
  logic signed [BITS-1:0] q_code;
  if (FULL) begin : g_obs_full
    assign q_fire = g_full.u_top.u_q.out_valid && g_full.u_top.u_q.out_ready;
    assign q_code = g_full.u_top.u_q.out_data;
  end else begin : g_obs_red
    assign q_fire = g_red.u_top.u_q.out_valid && g_red.u_top.u_q.out_ready;
    assign q_code = g_red.u_top.u_q.out_data;
  end

  // test data
  int A [M][K];
  int B [K][LANES];
  int Q [M][K];
  int octave [K];
  int rng [K];
  int rmax_ref;
  int grp_ref [K];
  int n_q = 0, n_rows = 0;
  int cnt_up = 0, cnt_down = 0, cnt_stall = 0, cnt_two_row = 0;
  int cnt_grp [4] = '{0, 0, 0, 0};
  int quant_cycles = 0;

  // element order of the raw stream: index -> (row, column)
  function automatic void elem_pos(input int idx, output int i, output int k);
    int beat;
    beat = idx / ROWS;
    i = (beat / K) * ROWS + (idx % ROWS);
    k = beat % K;
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      if (op_phase == 2'd3) quant_cycles++;
      if (op_phase == 2'd3 && raw_valid && !raw_ready && c_valid && !c_ready) cnt_stall++;
      if (q_fire) begin
        int i, k;
        real e;
        elem_pos(n_q, i, k);
        Q[i][k] = int'(q_code);
        e = real'(A[i][k]) * real'(QM) * real'(2 ** grp_ref[k]) / real'(rmax_ref);
        checks++;
        if (real'(q_code) < $floor(e - 1.0e-4) || real'(q_code) > $ceil(e + 1.0e-4)) begin
          failures++;
          if (failures < 10) $display("FAIL [%0d-bit] code %0d for exact %f", BITS, q_code, e);
        end
        if (real'(q_code) > e) cnt_up++;
        if (real'(q_code) < e) cnt_down++;
        n_q++;
      end
      if (c_valid && c_ready) begin
        for (int r = 0; r < ROWS; r++) begin
          int i;
          i = n_rows * ROWS + r;
          for (int j = 0; j < LANES; j++) begin
            automatic longint ex = 0;
            automatic real exact_real = 0.0, bound = 0.0;
            real deq;
            for (int k = 0; k < K; k++) begin
              real step;
              ex += longint'(Q[i][k] * B[k][j]) <<< (NG - 1 - grp_ref[k]);
              exact_real += real'(A[i][k]) * real'(B[k][j]);
              step = real'(rmax_ref) / real'(QM) / real'(2 ** grp_ref[k]);
              bound += step * real'((B[k][j] < 0) ? -B[k][j] : B[k][j]);
            end
            chk(longint'(c_row[r][j]), ex, "C entry bit-exact");
            deq = real'(c_row[r][j]) / real'(2 ** (NG - 1)) * real'(rmax_ref) / real'(QM);
            checks++;
            if (deq - exact_real > bound + 1.0e-6 || exact_real - deq > bound + 1.0e-6) begin
              failures++;
              if (failures < 10) $display("FAIL [%0d-bit] dequantized %f vs exact %f, bound %f", BITS, deq, exact_real, bound);
            end
          end
        end
        if (ROWS > 1) cnt_two_row++;
        n_rows++;
      end
      c_ready <= BP ? ($urandom_range(0, 7) == 0) : 1'b1;
    end
  end

  task automatic stream_raw();
    for (int idx = 0; idx < M * K; idx++) begin
      int i, k;
      bit rdy;
      elem_pos(idx, i, k);
      raw_valid = 1; raw_data = RAW_W'(A[i][k]);
      do begin
        rdy = raw_ready;
        @(negedge clk);
      end while (!rdy);
    end
    raw_valid = 0;
  endtask

  // L1 normalization of one channel through the top
  int bx [$];
  longint by [$];
  int bn_got = 0;
  always @(posedge clk) begin
    if (rst_n && bn_out_valid && bn_out_ready) begin
      chk(longint'(bn_out_data), by.pop_front(), "L1 BN output");
      bn_got++;
    end
  end

  task automatic bn_pass();
    foreach (bx[t]) begin
      bit rdy;
      bn_in_valid = 1; bn_in_data = 8'(bx[t]);
      do begin
        rdy = bn_in_ready;
        @(negedge clk);
      end while (!rdy);
    end
    bn_in_valid = 0;
  endtask

  initial begin
    int n_bn, gma, bta;
    longint S, Aab, sigma, mant, e, recip, mu;
    done = 0; checks = 0; failures = 0;
    void'($urandom(SEED));
    for (int j = 0; j < LANES; j++) w_row[j] = '0;
    for (int k = 0; k < K; k++) begin
      octave[k] = (k < 4) ? k : int'($urandom_range(0, 5));
      rng[k] = 0;
    end
    rmax_ref = 0;
    for (int i = 0; i < M; i++)
      for (int k = 0; k < K; k++) begin
        int lim;
        lim = (1 << (14 - octave[k])) - 1;
        A[i][k] = (i < MU && k < KU) ? int'($urandom_range(0, 2 * lim)) - lim : 0;
        if ((A[i][k] < 0 ? -A[i][k] : A[i][k]) > rng[k]) rng[k] = (A[i][k] < 0 ? -A[i][k] : A[i][k]);
      end
    for (int k = 0; k < K; k++) if (rng[k] > rmax_ref) rmax_ref = rng[k];
    for (int k = 0; k < K; k++) begin
      grp_ref[k] = NG - 1;
      for (int g = NG - 2; g >= 0; g--)
        if (real'(rng[k]) > real'(rmax_ref) / real'(2 ** (g + 1))) grp_ref[k] = g;
      cnt_grp[grp_ref[k]]++;
    end
    for (int k = 0; k < K; k++)
      for (int j = 0; j < LANES; j++) B[k][j] = int'($urandom_range(0, 2 * QM)) - QM;

    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int k = 0; k < K; k++) begin
      w_we = 1; w_k = KW'(k);
      for (int j = 0; j < LANES; j++) w_row[j] = BITS'(B[k][j]);
      @(negedge clk);
    end
    w_we = 0;

    op_start = 1;
    @(negedge clk);
    op_start = 0;
    stream_raw();                                   // SCAN
    while (op_phase != 2'd3) @(negedge clk);        // CFG
    chk(r_max, rmax_ref, "r_max");
    for (int k = 0; k < K; k++) chk(grp_map[k], grp_ref[k], "grouping map");
    stream_raw();                                   // QUANT
    while (op_busy) @(negedge clk);
    chk(n_rows, M / ROWS, "result rows");
    chk(n_q, M * K, "quantized elements");
    if (!BP) chk(quant_cycles <= M * K + 4, 1, "quantize-and-multiply at one element per cycle");
    $display("[%0d-bit M=%0d K=%0d LANES=%0d, data %0dx%0d] quant phase %0d cycles; groups %0d/%0d/%0d/%0d; round up %0d down %0d; stalls %0d; two-row beats %0d",
             BITS, M, K, LANES, MU, KU, quant_cycles, cnt_grp[0], cnt_grp[1], cnt_grp[2], cnt_grp[3],
             cnt_up, cnt_down, cnt_stall, cnt_two_row);
    for (int g = 0; g < NG; g++) chk(cnt_grp[g] > 0, 1, "every group used");
    chk(cnt_up > 0 && cnt_down > 0, 1, "stochastic rounding went both ways");
    if (BP) chk(cnt_stall > 0, 1, "result back-pressure stalled the input");
    if (ROWS > 1) chk(cnt_two_row > 0, 1, "two-row beats");

    // L1 normalization: one channel
    n_bn = 96; gma = 5; bta = -3;
    S = 0;
    for (int t = 0; t < n_bn; t++) begin
      bx.push_back(int'($urandom_range(0, 200)) - 100);
      S += bx[t];
    end
    mu = (S < 0) ? -((-2 * S + n_bn) / (2 * n_bn)) : ((2 * S + n_bn) / (2 * n_bn));
    Aab = 0;
    foreach (bx[t]) Aab += (n_bn * bx[t] - S < 0) ? -(n_bn * bx[t] - S) : (n_bn * bx[t] - S);
    sigma = Aab / n_bn;
    e = 0;
    while ((sigma >> e) >= 256) e++;
    mant = sigma >> e;
    recip = (mant == 0) ? 0 : ((64'd1 << 24) / mant);
    foreach (bx[t]) by.push_back(gma * (((bx[t] - mu) * recip) >>> (8 + e)) + (longint'(bta) <<< 16));
    bn_n = 16'(n_bn); bn_gamma = 8'(gma); bn_beta = 8'(bta); bn_start = 1;
    @(negedge clk);
    bn_start = 0;
    bn_pass();
    bn_pass();
    bn_pass();
    repeat (5) @(negedge clk);
    chk(bn_mu_q, mu, "L1 BN mean");
    chk(bn_sigma_mant, mant, "L1 BN norm mantissa");
    chk(bn_got, n_bn, "L1 BN outputs");
    done = 1;
  end

endmodule
