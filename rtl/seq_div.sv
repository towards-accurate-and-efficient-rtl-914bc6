// Sequential unsigned restoring divider.
//
// Computes quotient = dividend / divisor and the remainder, one quotient bit per
// clock, most significant first. A start pulse loads the operands; done pulses
// for one cycle W cycles later, when quotient and remainder are valid (they stay
// valid until the next start). A zero divisor gives an all-ones quotient. Used by
// the quantizer (reciprocal of the group scale) and the normalization unit
// (mean, L1 norm and reciprocal). The algorithm is this design's choice; the
// paper does not say how the divisions are done.
module seq_div #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quotient,
  output logic [W-1:0] remainder
);

  localparam int unsigned CW = $clog2(W + 1);

  logic [W-1:0]  dvs;
  logic [W-1:0]  num;
  logic [CW-1:0] cnt;
  logic [W+1:0]  trial;

  assign trial = {1'b0, remainder, num[W-1]} - {2'b00, dvs};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      quotient  <= '0;
      remainder <= '0;
      dvs       <= '0;
      num       <= '0;
      cnt       <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy      <= 1'b1;
        dvs       <= divisor;
        num       <= dividend;
        remainder <= '0;
        quotient  <= '0;
        cnt       <= CW'(W);
      end else if (busy) begin
        if (!trial[W+1]) begin
          remainder <= trial[W-1:0];
          quotient  <= {quotient[W-2:0], 1'b1};
        end else begin
          remainder <= {remainder[W-2:0], num[W-1]};
          quotient  <= {quotient[W-2:0], 1'b0};
        end
        num <= num << 1;
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
