// ShiftMM matrix-multiply engine: C = A * B with a per-inner-index shift.
//
// ShiftQuant gives every index k of the inner dimension one of NG power-of-two
// scales (group m[k]). Instead of splitting A and B into one sub-matrix pair per
// group, ShiftMM keeps the original layout and shifts each product before it is
// accumulated. As in the paper's code form, the shift is a left shift by
// (NG-1-m[k]), so nothing is rounded away:
//     C[i][j] * 2^-(NG-1) = sum_k (A[i][k] * B[k][j]) * 2^-m[k]
// The accumulator therefore holds the exact dot product scaled by 2^(NG-1); a
// right shift of the result by NG-1 gives the right-shift form of the paper.
//
// Organisation (this design's choice; the paper gives only the operation and
// the DSP packing): B (K x LANES, the weights) and the grouping map sit in the
// engine. A is streamed in row-major order, one inner index per beat, and each
// element is broadcast to LANES column accumulators. Pairs of columns share one
// packed DSP multiplier (dsp_reuse_mul), so LANES/2 DSP slices serve LANES MACs
// per cycle. With BITS = 4 each slice also takes a second row, so a beat
// carries ROWS = 2 elements, A[i][k] and A[i+1][k], and a slice yields four
// products. To match the slice count of the paper's 4-bit FPGA result (half
// that of the 6-bit one at the same latency), the 4-bit engine has only
// LANES/4 slices and spends two cycles on a beat: columns 0..LANES/2-1 in the
// first, LANES/2..LANES-1 in the second. Both widths then perform LANES MACs
// per cycle and take one A element per cycle on average.
//
// Interface:
//   w_we/w_k/w_row : write row k of B (LANES elements) into the weight buffer.
//   grp_map        : group index m[k] of every inner index.
//   a_*            : valid/ready stream of A beats (ROWS elements each).
//   c_*            : valid/ready stream of result rows (ROWS x LANES accumulators).
// Timing: BITS 6/8 take one beat per cycle. BITS 4 takes a beat in the first
// cycle of its two (a_ready is low in the second, while the held beat finishes
// the upper columns). A row's result is valid the cycle after its last beat
// has been fully processed. While a finished row waits on c_ready, the next
// row keeps accumulating; only its last beat stalls (a_ready low) until the
// wait is over.
module shiftmm_engine
  import sq_pkg::*;
#(
  parameter int unsigned BITS  = BITS_DEFAULT,
  parameter int unsigned NG    = NG_DEFAULT,
  parameter int unsigned K     = 288,
  parameter int unsigned LANES = 32,
  localparam int unsigned ROWS  = (BITS <= 4) ? 2 : 1,
  localparam int unsigned MAPW  = map_w(NG),
  localparam int unsigned KW    = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned ACC_W = 2*BITS + (NG - 1) + $clog2(K) + 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // weight buffer write port
  input  logic                    w_we,
  input  logic [KW-1:0]           w_k,
  input  logic signed [BITS-1:0]  w_row [LANES],
  // grouping map of the inner dimension
  input  logic [MAPW-1:0]         grp_map [K],
  // A stream
  input  logic                    a_valid,
  output logic                    a_ready,
  input  logic signed [BITS-1:0]  a_data [ROWS],
  // C stream
  output logic                    c_valid,
  input  logic                    c_ready,
  output logic signed [ACC_W-1:0] c_row [ROWS][LANES],
  // status
  output logic [KW-1:0]           k_idx
);

  localparam int unsigned HALVES = (ROWS > 1) ? 2 : 1;   // cycles per beat
  localparam int unsigned HALF   = LANES / HALVES;       // columns per cycle
  localparam int unsigned NDSP   = (HALF + 1) / 2;       // packed DSP slices
  localparam int unsigned CW     = (LANES > 1) ? $clog2(LANES) : 1;

  initial begin
    assert (LANES % HALVES == 0) else $error("shiftmm_engine: LANES must be even for BITS 4");
  end

  logic signed [BITS-1:0]   wmem [K][LANES];
  logic signed [ACC_W-1:0]  acc  [ROWS][LANES];
  logic signed [ACC_W-1:0]  nxt  [ROWS][LANES];
  logic signed [2*BITS-1:0] prod [ROWS][2*NDSP];
  logic signed [BITS-1:0]   a_hold [ROWS];
  logic signed [BITS-1:0]   a_cur  [ROWS];
  logic [KW-1:0]            k;
  logic                     h;          // column half being processed (BITS 4)
  logic                     last, a_fire, step, beat_end;
  logic [MAPW-1:0]          sh;
  logic [CW-1:0] col0;

  assign k_idx    = k;
  assign last     = (k == KW'(K - 1));
  assign a_ready  = !h && !(last && c_valid && !c_ready);
  assign a_fire   = a_valid && a_ready;
  assign step     = a_fire || h;                   // an accumulation happens this cycle
  assign beat_end = step && (HALVES == 1 || h);    // the beat's last column half
  assign sh       = MAPW'(NG - 1) - grp_map[k];
  assign col0     = h ? CW'(HALF) : '0;
  assign a_cur    = h ? a_hold : a_data;

  // weight buffer
  always_ff @(posedge clk) begin
    if (w_we) wmem[w_k] <= w_row;
  end

  // packed multipliers: one per column pair of the current half
  for (genvar d = 0; d < NDSP; d++) begin : g_dsp
    logic signed [BITS-1:0]   xs [2];
    logic signed [BITS-1:0]   ys [2];
    logic signed [2*BITS-1:0] ps [2][2];
    assign xs[0] = a_cur[0];
    assign xs[1] = (ROWS > 1) ? a_cur[ROWS-1] : '0;
    assign ys[0] = wmem[k][col0 + CW'(2*d)];
    // an odd column count leaves the upper half of the last slice unused
    assign ys[1] = (2*d+1 < HALF) ? wmem[k][col0 + CW'(2*d+1)] : '0;
    dsp_reuse_mul #(.BITS(BITS)) u_mul (.x(xs), .y(ys), .p(ps));
    for (genvar r = 0; r < ROWS; r++) begin : g_row
      assign prod[r][2*d]   = ps[r][0];
      assign prod[r][2*d+1] = ps[r][1];
    end
  end

  // shift-and-accumulate on the columns of the current half
  always_comb begin
    for (int r = 0; r < ROWS; r++)
      for (int j = 0; j < LANES; j++)
        if ((j / HALF) == int'(h))
          nxt[r][j] = ((k == '0) ? ACC_W'(0) : acc[r][j]) + (ACC_W'(prod[r][j % HALF]) <<< sh);
        else
          nxt[r][j] = acc[r][j];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k       <= '0;
      h       <= 1'b0;
      c_valid <= 1'b0;
      for (int r = 0; r < ROWS; r++) begin
        a_hold[r] <= '0;
        for (int j = 0; j < LANES; j++) begin
          acc[r][j]   <= '0;
          c_row[r][j] <= '0;
        end
      end
    end else begin
      if (c_valid && c_ready) c_valid <= 1'b0;
      if (a_fire) a_hold <= a_data;
      if (step) begin
        acc <= nxt;
        if (!beat_end) begin
          h <= 1'b1;
        end else begin
          h <= 1'b0;
          if (last) begin
            k       <= '0;
            c_row   <= nxt;
            c_valid <= 1'b1;
          end else begin
            k <= k + 1'b1;
          end
        end
      end
    end
  end

  // A finished row is held until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n) c_valid && !c_ready |=> c_valid)
    else $error("shiftmm_engine: c_valid dropped before c_ready");
  // Never accept the last beat of a row while the previous row is still waiting.
  assert property (@(posedge clk) disable iff (!rst_n) !(a_fire && last && c_valid && !c_ready))
    else $error("shiftmm_engine: result row overwritten");

endmodule
