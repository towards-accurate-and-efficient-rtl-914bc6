// ShiftQuant per-group quantizer with stochastic rounding.
//
// An element x of a channel in group g is quantized with the group's step
//     step_g = (tau_0 / B) * 2^-g,   q = SR(x / step_g) = SR(x * B * 2^g / tau_0)
// where tau_0 is the largest channel range, B = 2^(BITS-1)-1 the largest
// symmetric code and SR unbiased stochastic rounding: q rounds up with a
// probability equal to the fraction it drops. So every group uses the same
// scale up to a power of two, which ShiftMM later undoes with a shift.
//
// How it is computed (this design's choice): a configuration step divides once,
// recip = floor(B * 2^F / tau_0), using the sequential divider; each element is
// then one multiply, a shift by g, and a compare of the F dropped fraction bits
// against F fresh bits of an LFSR (round up when random < fraction). The result
// is clamped to [-B, B]. With tau_0 = 0 every code is 0.
//
// Interface: cfg_start with cfg_rmax = tau_0 starts the configuration; cfg_busy
// is high for about BITS+F cycles and cfg_done pulses at the end. Elements then
// stream in (in_valid/in_ready, with the group in_grp) and out one cycle later
// (out_valid/out_ready); in_ready is low while configuring or while the output
// register is full and not taken.
module shiftquant_quantizer
  import sq_pkg::*;
#(
  parameter int unsigned RAW_W = 16,
  parameter int unsigned BITS  = BITS_DEFAULT,
  parameter int unsigned NG    = NG_DEFAULT,
  parameter int unsigned F     = 24,
  parameter logic [31:0] SEED  = 32'h2545_F491,
  localparam int unsigned MAPW = map_w(NG)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // configuration
  input  logic                    cfg_start,
  input  logic [RAW_W-1:0]        cfg_rmax,
  output logic                    cfg_busy,
  output logic                    cfg_done,
  // input stream
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic signed [RAW_W-1:0] in_data,
  input  logic [MAPW-1:0]         in_grp,
  // output stream
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic signed [BITS-1:0]  out_data
);

  localparam int unsigned DW = BITS + F;                 // divider width
  localparam int unsigned TW = RAW_W + DW + NG + 2;      // scaled-product width
  localparam int          QM = int'(qmax(BITS));

  initial begin
    assert (F <= 31) else $error("shiftquant_quantizer: F must be at most 31");
  end

  logic [DW-1:0]        recip;
  logic [DW-1:0]        quo, rem_unused;
  logic                 div_done, rmax_zero;
  logic [31:0]          rnd;
  logic                 in_fire;
  logic signed [TW-1:0] t;
  logic signed [TW-1:0] fl;
  logic [F-1:0]         frac;
  logic                 up;
  logic signed [TW-1:0] q;

  seq_div #(.W(DW)) u_div (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (cfg_start),
    .dividend (DW'(QM) << F),
    .divisor  (DW'(cfg_rmax)),
    .busy     (cfg_busy),
    .done     (div_done),
    .quotient (quo),
    .remainder(rem_unused)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      recip     <= '0;
      rmax_zero <= 1'b1;
      cfg_done  <= 1'b0;
    end else begin
      cfg_done <= div_done;
      if (cfg_start) rmax_zero <= (cfg_rmax == '0);
      if (div_done)  recip     <= rmax_zero ? '0 : quo;
    end
  end

  lfsr32 #(.SEED(SEED)) u_rng (.clk(clk), .rst_n(rst_n), .en(in_fire), .value(rnd));

  assign in_ready = !cfg_busy && !cfg_start && (!out_valid || out_ready);
  assign in_fire  = in_valid && in_ready;

  always_comb begin
    t    = (TW'(in_data) * $signed(TW'(recip))) <<< in_grp;
    fl   = t >>> F;
    frac = t[F-1:0];
    up   = (rnd[F-1:0] < frac);
    q    = fl + TW'(up);
    if (q > TW'(QM))       q = TW'(QM);
    else if (q < TW'(-QM)) q = TW'(-QM);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_fire) begin
        out_valid <= 1'b1;
        out_data  <= BITS'(q);
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid)
    else $error("shiftquant_quantizer: out_valid dropped before out_ready");

endmodule
