// Fully-quantized L1 batch normalization of one channel.
//
// For the n = N*H*W quantized samples x of one channel the unit computes, as in
// the paper's flow (quantize input, mean and L1 norm, quantize statistics,
// normalize, scale and shift):
//     mu      = (1/n) * sum x                  mu_q    = Q(mu)
//     sigma   = sum |x - mu|   (an L1 norm)    sigma_q = Q(sigma)
//     x_hat   = (x - mu_q) / sigma_q
//     y       = gamma_q * x_hat + beta_q
// The L1 norm replaces the L2 norm (standard deviation) of ordinary batch
// normalization; it needs no square or square root. The paper writes sigma as
// a plain sum over the channel, without division by n, and this unit follows
// that literally (the learned gamma absorbs the factor).
//
// This design's choices, where the paper gives no detail:
//  * The samples are streamed three times: pass 1 sums them, pass 2 forms the
//    exact n*sigma = sum |n*x - sum x|, pass 3 produces the outputs. No sample
//    buffer is needed.
//  * Q(mu) rounds to the nearest integer of the input grid (half away from 0).
//  * Q(sigma) keeps SIG_W significant bits: sigma_q = mant * 2^e, mant < 2^SIG_W
//    (truncated). A zero sigma gives x_hat = 0.
//  * The division by sigma_q is one multiplication by recip = floor(2^R / mant),
//    computed once per channel; x_hat is produced in fixed point with FR
//    fraction bits, and so is y (beta_q is aligned to the same point).
//  * The three divisions (mean, sigma, reciprocal) share one sequential divider.
//
// Interface: start (with cfg_n, gamma_q, beta_q) begins a channel; samples are
// accepted on in_valid/in_ready during the three passes (phase tells which); the
// n results leave on out_valid/out_ready during pass 3, and done pulses after
// the last one. mu_q, sigma_mant and sigma_exp hold the channel's statistics.
// Timing: one sample per cycle in each pass, plus about 3*(2*NW+IN_W+2) cycles
// for the divisions; a pass-3 result appears one cycle after its sample.
module l1bn_unit #(
  parameter int unsigned IN_W  = 8,
  parameter int unsigned PAR_W = 8,
  parameter int unsigned NW    = 16,
  parameter int unsigned SIG_W = 8,
  parameter int unsigned R     = 24,
  parameter int unsigned FR    = 16,
  localparam int unsigned XH_W  = IN_W + R + 2,
  localparam int unsigned OUT_W = PAR_W + XH_W + 1,
  localparam int unsigned EW    = 6
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [NW-1:0]           cfg_n,
  input  logic signed [PAR_W-1:0] gamma_q,
  input  logic signed [PAR_W-1:0] beta_q,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic signed [IN_W-1:0]  in_data,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic signed [OUT_W-1:0] out_data,
  output logic [2:0]              phase,
  output logic                    done,
  output logic signed [IN_W-1:0]  mu_q,
  output logic [SIG_W-1:0]        sigma_mant,
  output logic [EW-1:0]           sigma_exp
);

  localparam int unsigned SW = IN_W + NW + 1;           // sum of samples
  localparam int unsigned AW = 2*NW + IN_W + 2;         // n * L1 norm
  localparam int unsigned DW = AW;                      // divider width

  initial begin
    assert (R >= FR) else $error("l1bn_unit: R must not be below FR");
    assert (R < DW)  else $error("l1bn_unit: R too large for the divider");
  end

  typedef enum logic [2:0] {
    S_IDLE  = 3'd0,
    S_SUM   = 3'd1,
    S_DMEAN = 3'd2,
    S_ABS   = 3'd3,
    S_DSIG  = 3'd4,
    S_DREC  = 3'd5,
    S_OUT   = 3'd6,
    S_QSIG  = 3'd7
  } state_t;

  state_t                 st;
  logic [NW-1:0]          n, cnt;
  logic signed [SW-1:0]   sum;
  logic [AW-1:0]          asum;
  logic [DW-1:0]          sigma;
  logic [DW-1:0]          recip;
  logic signed [PAR_W-1:0] gam, bet;

  // divider
  logic          d_start, d_busy, d_done;
  logic [DW-1:0] d_num, d_den, d_quo, d_rem;

  seq_div #(.W(DW)) u_div (
    .clk(clk), .rst_n(rst_n), .start(d_start), .dividend(d_num), .divisor(d_den),
    .busy(d_busy), .done(d_done), .quotient(d_quo), .remainder(d_rem)
  );

  logic in_fire, last;
  assign phase    = st;
  assign in_ready = (st == S_SUM) || (st == S_ABS) || ((st == S_OUT) && (!out_valid || out_ready));
  assign in_fire  = in_valid && in_ready;
  assign last     = (cnt == n - 1'b1);

  // |n*x - sum| for pass 2
  logic signed [AW-1:0] nx_minus_s;
  logic [AW-1:0]        abs_dev;
  assign nx_minus_s = AW'($signed({1'b0, n}) * in_data) - AW'(sum);
  assign abs_dev    = nx_minus_s[AW-1] ? AW'(-nx_minus_s) : AW'(nx_minus_s);

  // magnitude of the sum for the rounded mean
  logic [SW-1:0] sum_mag;
  assign sum_mag = sum[SW-1] ? SW'(-sum) : SW'(sum);

  // quantization of sigma to SIG_W significant bits
  logic [EW-1:0]    q_e;
  logic [SIG_W-1:0] q_m;
  always_comb begin
    q_e = '0;
    for (int b = 0; b < DW; b++)
      if (sigma[b] && (b >= int'(SIG_W))) q_e = EW'(b - int'(SIG_W) + 1);
    q_m = SIG_W'(sigma >> q_e);
  end

  // pass-3 datapath
  logic signed [IN_W:0]        dev;
  logic signed [XH_W+DW-1:0]   prod;
  logic signed [XH_W-1:0]      xhat;
  logic signed [OUT_W-1:0]     y;
  always_comb begin
    dev  = (IN_W+1)'(in_data) - (IN_W+1)'(mu_q);
    prod = (XH_W+DW)'(dev) * $signed({1'b0, recip});
    xhat = XH_W'(prod >>> (R - FR + 32'(sigma_exp)));
    y    = OUT_W'(gam) * OUT_W'(xhat) + (OUT_W'(bet) <<< FR);
  end

  always_comb begin
    d_start = 1'b0;
    d_num   = '0;
    d_den   = '0;
    unique case (st)
      S_DMEAN: begin
        d_num = (DW'(sum_mag) << 1) + DW'(n);
        d_den = DW'(n) << 1;
      end
      S_DSIG: begin
        d_num = DW'(asum);
        d_den = DW'(n);
      end
      S_DREC: begin
        d_num = DW'(1) << R;
        d_den = DW'(sigma_mant);
      end
      default: ;
    endcase
    if ((st == S_DMEAN || st == S_DSIG || st == S_DREC) && !d_busy && !d_done)
      d_start = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_IDLE;
      n          <= '0;
      cnt        <= '0;
      sum        <= '0;
      asum       <= '0;
      sigma      <= '0;
      recip      <= '0;
      gam        <= '0;
      bet        <= '0;
      mu_q       <= '0;
      sigma_mant <= '0;
      sigma_exp  <= '0;
      out_valid  <= 1'b0;
      out_data   <= '0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      unique case (st)
        S_IDLE: if (start && cfg_n != '0) begin
          n    <= cfg_n;
          gam  <= gamma_q;
          bet  <= beta_q;
          cnt  <= '0;
          sum  <= '0;
          asum <= '0;
          st   <= S_SUM;
        end
        S_SUM: if (in_fire) begin
          sum <= sum + SW'(in_data);
          cnt <= last ? '0 : cnt + 1'b1;
          if (last) st <= S_DMEAN;
        end
        S_DMEAN: if (d_done) begin
          mu_q    <= sum[SW-1] ? IN_W'(-d_quo) : IN_W'(d_quo);
          st      <= S_ABS;
        end
        S_ABS: if (in_fire) begin
          asum <= asum + abs_dev;
          cnt  <= last ? '0 : cnt + 1'b1;
          if (last) st <= S_DSIG;
        end
        S_DSIG: if (d_done) begin
          sigma <= d_quo;
          st    <= S_QSIG;
        end
        S_QSIG: begin
          sigma_exp  <= q_e;
          sigma_mant <= q_m;
          st         <= S_DREC;
        end
        S_DREC: if (d_done) begin
          recip <= (sigma_mant == '0) ? '0 : d_quo;
          st    <= S_OUT;
        end
        S_OUT: if (in_fire) begin
          out_valid <= 1'b1;
          out_data  <= y;
          cnt       <= last ? '0 : cnt + 1'b1;
          if (last) begin
            st   <= S_IDLE;
            done <= 1'b1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
