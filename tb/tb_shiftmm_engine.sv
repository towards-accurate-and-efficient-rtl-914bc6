// Self-checking test of the ShiftMM engine.
//
// Part 1 reproduces the worked example of the ShiftMM figure: a 2x4 quantized
// gradient times a 4x2 quantized weight matrix, two groups, grouping map
// (0,1,1,0), 4-bit operands (so the engine takes both rows in one beat and uses
// the four-product DSP packing). The engine holds 2x the exact result; the
// figure prints the result shifted right by one and truncated, (2, 2; -18, -29),
// and both forms are checked.
// Part 2 runs a 6-bit, four-group engine on random matrices and random grouping
// maps against a reference computed here, with random back-pressure on the
// result stream, and checks that a full-rate run takes exactly rows*K cycles.
module tb_shiftmm_engine;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(negedge clk) cyc++;

  task automatic chk(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- part 1: the figure example ----------------
  localparam int K1 = 4, L1 = 2;
  logic                 w_we1 = 0;
  logic [1:0]           w_k1 = 0;
  logic signed [3:0]    w_row1 [L1];
  logic [0:0]           map1 [K1];
  logic                 a_valid1 = 0, a_ready1, c_valid1, c_ready1 = 1;
  logic signed [3:0]    a_data1 [2];
  localparam int unsigned ACC1 = 2*4 + 1 + $clog2(K1) + 1;
  logic signed [ACC1-1:0] c_row1 [2][L1];
  logic [1:0]           kidx1;

  shiftmm_engine #(.BITS(4), .NG(2), .K(K1), .LANES(L1)) u_fig (
    .clk(clk), .rst_n(rst_n), .w_we(w_we1), .w_k(w_k1), .w_row(w_row1), .grp_map(map1),
    .a_valid(a_valid1), .a_ready(a_ready1), .a_data(a_data1),
    .c_valid(c_valid1), .c_ready(c_ready1), .c_row(c_row1), .k_idx(kidx1));

  // ---------------- part 2: random 6-bit ----------------
  localparam int K2 = 24, L2 = 8, NG2 = 4, ROWS2 = 12;
  localparam int unsigned ACC2 = 2*6 + (NG2-1) + $clog2(K2) + 1;
  logic                 w_we2 = 0;
  logic [4:0]           w_k2 = 0;
  logic signed [5:0]    w_row2 [L2];
  logic [1:0]           map2 [K2];
  logic                 a_valid2 = 0, a_ready2, c_valid2, c_ready2 = 1;
  logic signed [5:0]    a_data2 [1];
  logic signed [ACC2-1:0] c_row2 [1][L2];
  logic [4:0]           kidx2;

  shiftmm_engine #(.BITS(6), .NG(NG2), .K(K2), .LANES(L2)) u_rnd (
    .clk(clk), .rst_n(rst_n), .w_we(w_we2), .w_k(w_k2), .w_row(w_row2), .grp_map(map2),
    .a_valid(a_valid2), .a_ready(a_ready2), .a_data(a_data2),
    .c_valid(c_valid2), .c_ready(c_ready2), .c_row(c_row2), .k_idx(kidx2));

  int A2 [ROWS2][K2];
  int B2 [K2][L2];
  int stalls = 0;
  bit bp = 0;

  initial begin
    int ga [2][4] = '{'{2, 0, 1, 6}, '{-5, 1, -2, -4}};
    int wt [4][2] = '{'{3, 7}, '{-7, -3}, '{4, 1}, '{-1, -2}};
    int fig_exact2 [2][2] = '{'{4, 5}, '{-37, -59}};
    int fig_print  [2][2] = '{'{2, 2}, '{-18, -29}};
    int t0, t1, nrow;

    map1 = '{1'b0, 1'b1, 1'b1, 1'b0};
    for (int j = 0; j < L1; j++) w_row1[j] = '0;
    a_data1[0] = '0; a_data1[1] = '0;
    for (int j = 0; j < L2; j++) w_row2[j] = '0;
    a_data2[0] = '0;
    for (int k = 0; k < K2; k++) map2[k] = 2'($urandom_range(0, 3));
    for (int i = 0; i < ROWS2; i++)
      for (int k = 0; k < K2; k++) A2[i][k] = $urandom_range(0, 63) - 32;
    for (int k = 0; k < K2; k++)
      for (int j = 0; j < L2; j++) B2[k][j] = $urandom_range(0, 63) - 32;
    // corner values
    A2[0][0] = -32; B2[0][0] = -32; map2[0] = 2'd0;

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // load weights
    for (int k = 0; k < K1; k++) begin
      w_we1 <= 1; w_k1 <= 2'(k);
      for (int j = 0; j < L1; j++) w_row1[j] <= 4'(wt[k][j]);
      @(posedge clk);
    end
    w_we1 <= 0;
    for (int k = 0; k < K2; k++) begin
      w_we2 <= 1; w_k2 <= 5'(k);
      for (int j = 0; j < L2; j++) w_row2[j] <= 6'(B2[k][j]);
      @(posedge clk);
    end
    w_we2 <= 0;

    // part 1: stream the two rows column by column
    // (the 4-bit engine spends two cycles on each beat: 2*K1 cycles in all)
    @(negedge clk);
    t0 = cyc;
    for (int k = 0; k < K1; k++) begin
      bit rdy;
      a_valid1 = 1; a_data1[0] = 4'(ga[0][k]); a_data1[1] = 4'(ga[1][k]);
      do begin
        rdy = a_ready1;
        @(negedge clk);
      end while (!rdy);
    end
    a_valid1 = 0;
    @(negedge clk);
    chk(cyc - t0, 2 * K1, "figure: two cycles per beat, result right after the last");
    chk(c_valid1, 1, "figure result valid");
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 2; j++) begin
        int v;
        v = int'(c_row1[i][j]);
        chk(v, fig_exact2[i][j], "figure exact x2");
        chk((v < 0) ? -((-v) >>> 1) : (v >>> 1), fig_print[i][j], "figure printed value");
      end

    // part 2a: full rate, c_ready always high: exactly ROWS2*K2 cycles
    t0 = cyc;
    for (int i = 0; i < ROWS2; i++)
      for (int k = 0; k < K2; k++) begin
        a_valid2 <= 1; a_data2[0] <= 6'(A2[i][k]);
        @(posedge clk);
        while (!a_ready2) begin stalls++; @(posedge clk); end
      end
    a_valid2 <= 0;
    t1 = cyc;
    chk(t1 - t0, ROWS2 * K2, "full-rate cycle count");

    // part 2b: same data with random back-pressure on results
    repeat (5) @(posedge clk);
    bp = 1;
    for (int i = 0; i < ROWS2; i++)
      for (int k = 0; k < K2; k++) begin
        a_valid2 <= 1; a_data2[0] <= 6'(A2[i][k]);
        @(posedge clk);
        while (!a_ready2) begin stalls++; @(posedge clk); end
      end
    a_valid2 <= 0;
    repeat (400) @(posedge clk);
    bp = 0;
    chk(stalls > 0, 1, "back-pressure stalled the input at least once");
    $display("input stalls under back-pressure: %0d", stalls);
    chk(nrow_seen, 2 * ROWS2, "result rows received");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result checker for part 2
  int nrow_seen = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (c_valid2 && c_ready2) begin
        automatic int i;
        i = nrow_seen % ROWS2;
        for (int j = 0; j < L2; j++) begin
          automatic longint e = 0;
          for (int k = 0; k < K2; k++)
            e += longint'(A2[i][k] * B2[k][j]) <<< (NG2 - 1 - int'(map2[k]));
          chk(longint'(c_row2[0][j]), e, "random row result");
        end
        nrow_seen++;
      end
      c_ready2 <= bp ? ($urandom_range(0, 63) == 0) : 1'b1;
    end
  end

endmodule
