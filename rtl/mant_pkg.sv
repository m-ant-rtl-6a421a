// mant_pkg: types and constants shared by the MANT accelerator.
//
// MANT (mathematically adaptive numerical type) stores a weight or KV-cache
// element as a 4-bit sign-magnitude index i (sign bit, |i| in 0..7). The real
// value it stands for is  +-(a*|i| + 2^|i|) * s,  where a is an 8-bit
// per-group coefficient and s the per-group scale. Sixteen data types are
// offered per group: fifteen values of a and plain INT (value = i). A group's
// type is held as a 4-bit type code; code 15 is INT.
//
// Numbers that come from the paper: the array size (32x32 PE groups), the
// group size 64, the set of a values, INT8 activations, 2/4/8-bit weights.
// Our own choices: the fixed-point formats of scales (16-bit, 8 fraction
// bits) and of dequantized values (24-bit signed integers), the psum width
// and the encoding of the type code.
package mant_pkg;

  localparam int ROWS   = 32;   // PEG rows (accumulation dimension, INT8 weights)
  localparam int COLS   = 32;   // PEG columns (output channels)
  localparam int LANES  = 4;    // PEs per PEG, each takes one 2-bit weight slice
  localparam int GROUP  = 64;   // quantization group size
  localparam int PSW    = 32;   // psum1 / psum2 width
  localparam int VW     = 24;   // dequantized value width (signed fixed point)
  localparam int SW     = 16;   // scale width (unsigned, SFRAC fraction bits)
  localparam int SFRAC  = 8;
  localparam int NTYPES = 16;
  localparam logic [3:0] TYPE_INT = 4'd15;

  // Weight precision of the array.
  typedef enum logic [1:0] {W8 = 2'd0, W4 = 2'd1, W2 = 2'd2} wmode_e;

  // Quantization applied to a finished output tile.
  typedef enum logic [1:0] {
    OQ_NONE   = 2'd0,   // keep dequantized fixed-point values
    OQ_ACT8   = 2'd1,   // activation: group-wise INT8, spatial RQU dataflow
    OQ_KMANT  = 2'd2,   // K cache: group-wise 4-bit MANT along the row, spatial
    OQ_VMANT  = 2'd3    // V cache (prefill): 4-bit MANT along the column, temporal
  } oqmode_e;

  // The coefficient a of each type code; code 15 (INT) has no a.
  function automatic logic [7:0] a_of(input logic [3:0] code);
    case (code)
      4'd0:  return 8'd0;    4'd1:  return 8'd5;    4'd2:  return 8'd10;
      4'd3:  return 8'd17;   4'd4:  return 8'd20;   4'd5:  return 8'd30;
      4'd6:  return 8'd40;   4'd7:  return 8'd50;   4'd8:  return 8'd60;
      4'd9:  return 8'd70;   4'd10: return 8'd80;   4'd11: return 8'd90;
      4'd12: return 8'd100;  4'd13: return 8'd110;  4'd14: return 8'd120;
      default: return 8'd0;
    endcase
  endfunction

  // Grid magnitude of index i (0..7) for a type code: a*i + 2^i, or i for INT.
  function automatic logic [10:0] grid(input logic [3:0] code, input logic [2:0] i);
    if (code == TYPE_INT) return 11'(i);
    return 11'(a_of(code)) * 11'(i) + (11'd1 << i);
  endfunction

  // Largest grid magnitude: 7a + 128, or 7 for INT.
  function automatic logic [10:0] gmax(input logic [3:0] code);
    return grid(code, 3'd7);
  endfunction

endpackage
