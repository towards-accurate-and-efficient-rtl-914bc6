// Packed low-bitwidth multiplier on one DSP slice ("DSP reusing").
//
// A DSP slice multiplies an 18-bit port A by a 25-bit port B. Low-bitwidth
// operands are placed side by side on the ports so that one wide multiply
// yields several independent products:
//   BITS = 8 : A = x1,              B = y1 + y2<<16 -> x1*y1 at [15:0],  x1*y2 at [31:16]
//   BITS = 6 : A = x1,              B = y1 + y2<<18 -> x1*y1 at [11:0],  x1*y2 at [29:18]
//   BITS = 4 : A = x1 + x2<<8,      B = y1 + y2<<16 -> x1*y1 [7:0], x2*y1 [15:8],
//                                                      x1*y2 [23:16], x2*y2 [31:24]
// The operand and product bit positions are those printed in the paper's DSP
// packing figures. The paper draws unsigned fields; with signed (two's
// complement) operands a negative lower field borrows from the field above it,
// so this design extracts the fields from the bottom up, sign-extends each one
// and adds its sign back into the remainder before taking the next field. The
// result is exact for every signed operand value.
//
// Interface: x[0..1], y[0..1] signed BITS-wide; p[i][j] = x[i]*y[j], 2*BITS wide.
// For BITS 6 and 8 only x[0] is used and p[1][*] is zero.
// Timing: purely combinational; the caller registers the result.
module dsp_reuse_mul
  import sq_pkg::*;
#(
  parameter int unsigned BITS = BITS_DEFAULT
) (
  input  logic signed [BITS-1:0]   x [2],
  input  logic signed [BITS-1:0]   y [2],
  output logic signed [2*BITS-1:0] p [2][2]
);

  localparam bit          QUAD = (BITS <= 4);
  localparam int unsigned XOFF = 8;                    // second x on port A (4-bit only)
  localparam int unsigned YOFF = yoff(BITS);           // second y on port B
  localparam int unsigned NF   = QUAD ? 4 : 2;         // fields in the product
  localparam int unsigned FS   = QUAD ? 8 : YOFF;      // field stride in the product

  initial begin
    assert (BITS == 4 || BITS == 6 || BITS == 8)
      else $error("dsp_reuse_mul: BITS must be 4, 6 or 8");
  end

  logic signed [DSP_A_W-1:0] port_a;
  logic signed [DSP_B_W-1:0] port_b;
  logic signed [DSP_P_W-1:0] prod;
  logic signed [DSP_P_W-1:0] rem   [NF+1];
  logic signed [FS-1:0]      field [NF];

  always_comb begin
    port_a = DSP_A_W'(x[0]);
    if (QUAD) port_a = port_a + (DSP_A_W'(x[1]) <<< XOFF);
    port_b = DSP_B_W'(y[0]) + (DSP_B_W'(y[1]) <<< YOFF);
    prod   = DSP_P_W'(port_a) * DSP_P_W'(port_b);

    // Bottom-up field extraction with borrow correction.
    rem[0] = prod;
    for (int f = 0; f < NF; f++) begin
      field[f]  = rem[f][FS-1:0];
      rem[f+1]  = (rem[f] - DSP_P_W'(field[f])) >>> FS;
    end

  end

  if (QUAD) begin : g_quad
    assign p[0][0] = (2*BITS)'(field[0]);
    assign p[1][0] = (2*BITS)'(field[1]);
    assign p[0][1] = (2*BITS)'(field[NF-2]);
    assign p[1][1] = (2*BITS)'(field[NF-1]);
  end else begin : g_pair
    assign p[0][0] = (2*BITS)'(field[0]);
    assign p[0][1] = (2*BITS)'(field[NF-1]);
    assign p[1][0] = '0;
    assign p[1][1] = '0;
  end

endmodule
