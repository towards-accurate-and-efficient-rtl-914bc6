// 32-bit Galois LFSR, the random source of stochastic rounding.
//
// Polynomial x^32 + x^22 + x^2 + x + 1 (taps 0x80200003), maximal length. The
// state advances by one step on every cycle with en high; value is the current
// state. A zero seed is replaced by 1 so the register never locks up. The paper
// requires stochastic rounding but does not say where its random numbers come
// from; the LFSR is this design's choice.
module lfsr32 #(
  parameter logic [31:0] SEED = 32'h1234_5678
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [31:0] value
);

  localparam logic [31:0] TAPS = 32'h8020_0003;
  localparam logic [31:0] INIT = (SEED == '0) ? 32'h1 : SEED;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  value <= INIT;
    else if (en) value <= value[0] ? ((value >> 1) ^ TAPS) : (value >> 1);
  end

endmodule
