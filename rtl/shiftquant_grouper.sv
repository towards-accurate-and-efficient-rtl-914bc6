// ShiftQuant power-of-two channel grouping.
//
// While the un-quantized operand streams past (one element per cycle, with its
// inner-dimension index in_k), the grouper keeps the largest magnitude seen in
// every channel, r[k], and the largest over all channels, tau_0 = r_max. The
// paper fixes the group thresholds at powers of two below tau_0,
// tau_g = tau_0 * 2^-g, and a channel belongs to the group whose band holds its
// range. A channel is therefore in group g (0 .. NG-1) for the smallest g with
//     r[k] * 2^(g+1) > r_max,
// and in the last group NG-1 when no such g exists (including empty channels).
// This needs only shifts and compares: no sort and no search.
//
// The channel range is taken as the largest magnitude |x| (symmetric
// quantization); that reading, the raw sample width and the use of a clear
// pulse between tensors are this design's choices.
//
// Interface: clear resets all ranges; in_valid/in_k/in_data feed one sample;
// r_max and grp_map are valid the cycle after the last sample and stay valid
// until the next clear or sample. grp_map is combinational from the ranges.
module shiftquant_grouper
  import sq_pkg::*;
#(
  parameter int unsigned RAW_W = 16,
  parameter int unsigned NG    = NG_DEFAULT,
  parameter int unsigned K     = 288,
  localparam int unsigned MAPW = map_w(NG),
  localparam int unsigned KW   = (K > 1) ? $clog2(K) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    in_valid,
  input  logic [KW-1:0]           in_k,
  input  logic signed [RAW_W-1:0] in_data,
  output logic [RAW_W-1:0]        r_max,
  output logic [RAW_W-1:0]        ch_range [K],
  output logic [MAPW-1:0]         grp_map  [K]
);

  logic [RAW_W-1:0] mag;

  assign mag = in_data[RAW_W-1] ? RAW_W'(-in_data) : RAW_W'(in_data);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_max <= '0;
      for (int k = 0; k < K; k++) ch_range[k] <= '0;
    end else if (clear) begin
      r_max <= '0;
      for (int k = 0; k < K; k++) ch_range[k] <= '0;
    end else if (in_valid) begin
      if (mag > ch_range[in_k]) ch_range[in_k] <= mag;
      if (mag > r_max)          r_max          <= mag;
    end
  end

  always_comb begin
    for (int k = 0; k < K; k++) begin
      grp_map[k] = MAPW'(NG - 1);
      for (int g = NG - 2; g >= 0; g--) begin
        if (({NG'(0), ch_range[k]} << (g + 1)) > {NG'(0), r_max})
          grp_map[k] = MAPW'(g);
      end
    end
  end

endmodule
