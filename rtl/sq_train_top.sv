// Integer-training datapath: ShiftQuant + ShiftMM, and fully-quantized L1 BN.
//
// The matrix path computes C = Q(A) * B for an M x K left operand A that arrives
// in high precision (for example the output gradient G_B in G_A = G_B * W^T) and
// an already quantized K x LANES right operand B (the weights W^T):
//   1. SCAN  : A streams in once; the grouper records each inner channel's range
//              and assigns it to one of NG power-of-two groups.
//   2. CFG   : the quantizer derives its reciprocal scale from tau_0 = r_max.
//   3. QUANT : A streams in a second time; each element is quantized with its
//              channel's group step and fed to the ShiftMM engine, which shifts
//              every product by its group before accumulating. C rows leave on
//              the c_* stream.
// Nothing is rearranged in memory between the steps. The normalization unit
// (l1bn_unit) is a separate datapath with its own ports; it normalizes one
// channel per start.
//
// Following the paper: the grouping rule, the group step (tau_0/B)*2^-g with
// stochastic rounding, the shifted accumulation, DSP packing, NG = 4, INT6, the
// FPGA problem size (M, K, LANES) = (1024, 288, 32). This design's own choices:
// the two-pass streaming of A, the control sequence, the handshakes and the
// widths not given in the paper.
//
// Interface:
//   w_*          : load row k of B into the engine (only while idle).
//   op_start     : begin one M x K x LANES product; op_busy until the last C row
//                  has been taken, then op_done pulses.
//   raw_*        : A in row-major order, sent twice (SCAN, then QUANT). With
//                  BITS = 4 the engine takes two rows per beat and A is sent as
//                  row pairs, column by column: A[i][k], A[i+1][k], A[i][k+1], ...
//   c_*          : result rows, each ROWS x LANES accumulators holding the exact
//                  dot products times 2^(NG-1) in the integer units of Q(A)*B.
//   r_max, grp_map: the grouping of the current operation.
//   bn_*         : the L1 normalization unit's ports.
// Timing: SCAN and QUANT take one element per cycle when no stall occurs; CFG
// takes about BITS+F cycles.
module sq_train_top
  import sq_pkg::*;
#(
  parameter int unsigned BITS  = BITS_DEFAULT,
  parameter int unsigned NG    = NG_DEFAULT,
  parameter int unsigned M     = 1024,
  parameter int unsigned K     = 288,
  parameter int unsigned LANES = 32,
  parameter int unsigned RAW_W = 16,
  parameter int unsigned F     = 24,
  parameter int unsigned BN_IN_W  = 8,
  parameter int unsigned BN_PAR_W = 8,
  parameter int unsigned BN_NW    = 16,
  localparam int unsigned ROWS  = (BITS <= 4) ? 2 : 1,
  localparam int unsigned MAPW  = map_w(NG),
  localparam int unsigned KW    = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned ACC_W = 2*BITS + (NG - 1) + $clog2(K) + 1,
  localparam int unsigned TOT   = M * K,
  localparam int unsigned TW    = $clog2(TOT + 1),
  localparam int unsigned CROWS = M / ROWS,
  localparam int unsigned CW    = $clog2(CROWS + 1),
  localparam int unsigned BN_OUT_W = BN_PAR_W + BN_IN_W + 24 + 2 + 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // weight load
  input  logic                       w_we,
  input  logic [KW-1:0]              w_k,
  input  logic signed [BITS-1:0]     w_row [LANES],
  // operation control
  input  logic                       op_start,
  output logic                       op_busy,
  output logic                       op_done,
  output logic [1:0]                 op_phase,
  // raw A stream
  input  logic                       raw_valid,
  output logic                       raw_ready,
  input  logic signed [RAW_W-1:0]    raw_data,
  // result rows
  output logic                       c_valid,
  input  logic                       c_ready,
  output logic signed [ACC_W-1:0]    c_row [ROWS][LANES],
  // grouping
  output logic [RAW_W-1:0]           r_max,
  output logic [MAPW-1:0]            grp_map [K],
  // L1 normalization unit
  input  logic                       bn_start,
  input  logic [BN_NW-1:0]           bn_n,
  input  logic signed [BN_PAR_W-1:0] bn_gamma,
  input  logic signed [BN_PAR_W-1:0] bn_beta,
  input  logic                       bn_in_valid,
  output logic                       bn_in_ready,
  input  logic signed [BN_IN_W-1:0]  bn_in_data,
  output logic                       bn_out_valid,
  input  logic                       bn_out_ready,
  output logic signed [BN_OUT_W-1:0] bn_out_data,
  output logic                       bn_done,
  output logic signed [BN_IN_W-1:0]  bn_mu_q,
  output logic [7:0]                 bn_sigma_mant,
  output logic [5:0]                 bn_sigma_exp
);

  initial begin
    assert (M % ROWS == 0) else $error("sq_train_top: M must be a multiple of ROWS");
  end

  typedef enum logic [1:0] {P_IDLE = 2'd0, P_SCAN = 2'd1, P_CFG = 2'd2, P_QUANT = 2'd3} phase_t;

  phase_t         ph;
  logic [TW-1:0]  n_in;          // raw elements accepted in this pass
  logic [KW-1:0]  k;             // inner index of the current raw element
  logic [$clog2(ROWS+1)-1:0] r;  // row within a beat
  logic [CW-1:0]  n_c;           // result rows taken
  logic           raw_fire;
  logic           cfg_start, cfg_busy, cfg_done, cfg_sent;

  // quantizer <-> gather <-> engine
  logic                   q_in_ready, q_out_valid, q_out_ready;
  logic signed [BITS-1:0] q_out_data;
  logic                   a_valid, a_ready;
  logic signed [BITS-1:0] a_data [ROWS];
  logic [KW-1:0]          k_idx;

  assign op_phase  = ph;
  assign op_busy   = (ph != P_IDLE);
  assign raw_ready = (ph == P_SCAN) || ((ph == P_QUANT) && q_in_ready && (n_in != TW'(TOT)));
  assign raw_fire  = raw_valid && raw_ready;
  assign cfg_start = (ph == P_CFG) && !cfg_sent;

  shiftquant_grouper #(.RAW_W(RAW_W), .NG(NG), .K(K)) u_grp (
    .clk(clk), .rst_n(rst_n),
    .clear   (op_start && ph == P_IDLE),
    .in_valid(raw_fire && ph == P_SCAN),
    .in_k    (k),
    .in_data (raw_data),
    .r_max   (r_max),
    .ch_range(),
    .grp_map (grp_map)
  );

  shiftquant_quantizer #(.RAW_W(RAW_W), .BITS(BITS), .NG(NG), .F(F)) u_q (
    .clk(clk), .rst_n(rst_n),
    .cfg_start(cfg_start), .cfg_rmax(r_max), .cfg_busy(cfg_busy), .cfg_done(cfg_done),
    .in_valid (raw_valid && ph == P_QUANT && n_in != TW'(TOT)),
    .in_ready (q_in_ready),
    .in_data  (raw_data),
    .in_grp   (grp_map[k]),
    .out_valid(q_out_valid), .out_ready(q_out_ready), .out_data(q_out_data)
  );

  // gather ROWS quantized elements into one engine beat
  if (ROWS == 1) begin : g_direct
    assign a_valid     = q_out_valid;
    assign a_data[0]   = q_out_data;
    assign q_out_ready = a_ready;
  end else begin : g_gather
    logic signed [BITS-1:0] hold [ROWS-1];
    logic [$clog2(ROWS)-1:0] fill;
    assign a_valid = q_out_valid && (fill == ROWS - 1);
    for (genvar i = 0; i < ROWS - 1; i++) begin : g_a
      assign a_data[i] = hold[i];
    end
    assign a_data[ROWS-1] = q_out_data;
    assign q_out_ready = (fill != ROWS - 1) || a_ready;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        fill <= '0;
        for (int i = 0; i < ROWS - 1; i++) hold[i] <= '0;
      end else if (q_out_valid && q_out_ready) begin
        if (fill == ROWS - 1) fill <= '0;
        else begin
          hold[fill] <= q_out_data;
          fill       <= fill + 1'b1;
        end
      end
    end
  end

  shiftmm_engine #(.BITS(BITS), .NG(NG), .K(K), .LANES(LANES)) u_mm (
    .clk(clk), .rst_n(rst_n),
    .w_we(w_we && ph == P_IDLE), .w_k(w_k), .w_row(w_row),
    .grp_map(grp_map),
    .a_valid(a_valid), .a_ready(a_ready), .a_data(a_data),
    .c_valid(c_valid), .c_ready(c_ready), .c_row(c_row),
    .k_idx(k_idx)
  );

  // sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph      <= P_IDLE;
      n_in    <= '0;
      k       <= '0;
      r       <= '0;
      n_c     <= '0;
      op_done <= 1'b0;
      cfg_sent <= 1'b0;
    end else begin
      op_done <= 1'b0;
      if (cfg_start) cfg_sent <= 1'b1;
      if (raw_fire) begin
        n_in <= n_in + 1'b1;
        if (32'(r) == ROWS - 1) begin
          r <= '0;
          k <= (k == KW'(K - 1)) ? '0 : k + 1'b1;
        end else begin
          r <= r + 1'b1;
        end
      end
      if (c_valid && c_ready && ph == P_QUANT) n_c <= n_c + 1'b1;
      unique case (ph)
        P_IDLE: if (op_start) begin
          ph       <= P_SCAN;
          cfg_sent <= 1'b0;
          n_in <= '0;
          k    <= '0;
          r    <= '0;
          n_c  <= '0;
        end
        P_SCAN: if (raw_fire && n_in == TW'(TOT - 1)) ph <= P_CFG;
        P_CFG: if (cfg_done) begin
          ph   <= P_QUANT;
          n_in <= '0;
          k    <= '0;
          r    <= '0;
        end
        P_QUANT: if (c_valid && c_ready && n_c == CW'(CROWS - 1)) begin
          ph      <= P_IDLE;
          op_done <= 1'b1;
        end
        default: ph <= P_IDLE;
      endcase
    end
  end

  l1bn_unit #(.IN_W(BN_IN_W), .PAR_W(BN_PAR_W), .NW(BN_NW), .SIG_W(8), .R(24), .FR(16)) u_bn (
    .clk(clk), .rst_n(rst_n),
    .start(bn_start), .cfg_n(bn_n), .gamma_q(bn_gamma), .beta_q(bn_beta),
    .in_valid(bn_in_valid), .in_ready(bn_in_ready), .in_data(bn_in_data),
    .out_valid(bn_out_valid), .out_ready(bn_out_ready), .out_data(bn_out_data),
    .phase(), .done(bn_done),
    .mu_q(bn_mu_q), .sigma_mant(bn_sigma_mant), .sigma_exp(bn_sigma_exp)
  );

endmodule
