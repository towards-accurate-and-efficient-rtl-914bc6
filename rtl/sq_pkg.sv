// Shared constants and helpers of the ShiftQuant integer-training datapath.
//
// The number of groups (4) and the operand bitwidth of the FPGA matrix unit (INT6)
// follow the paper; the DSP port widths are those of the DSP48E1 slice the paper
// packs its products into (18-bit port A and 25-bit port B as drawn in its figures).
// The raw (pre-quantization) sample width and the fixed-point precisions are this
// design's own choices.
package sq_pkg;

  // Default number of ShiftQuant groups; a 2-bit grouping map.
  localparam int unsigned NG_DEFAULT   = 4;
  // Default operand bitwidth of the ShiftMM unit.
  localparam int unsigned BITS_DEFAULT = 6;
  // Multiplier input widths of one DSP slice.
  localparam int unsigned DSP_A_W      = 18;
  localparam int unsigned DSP_B_W      = 25;
  localparam int unsigned DSP_P_W      = DSP_A_W + DSP_B_W;

  // Width of a grouping-map entry for ng groups.
  function automatic int unsigned map_w(input int unsigned ng);
    return (ng > 1) ? $clog2(ng) : 1;
  endfunction

  // Bit offset of the second y operand on DSP port B (Figures 14-16):
  // 16 for 8-bit and 4-bit operands, 18 for 6-bit operands.
  function automatic int unsigned yoff(input int unsigned bits);
    return (bits == 6) ? 18 : 16;
  endfunction

  // Largest quantized magnitude of a symmetric signed bits-wide integer.
  function automatic int unsigned qmax(input int unsigned bits);
    return (1 << (bits - 1)) - 1;
  endfunction

endpackage
