// dtc_pkg -- shared types and default sizes of the dilated/transposed
// convolution engine.
//
// The engine runs a 3x3 convolution on an array of n x 3 MAC blocks. A
// dilated convolution is turned into (1+D)^2 dense convolutions by splitting
// the input into sub-sampled blocks; a transposed (stride-2, zero-inserted)
// convolution is turned into dense work by splitting the 3x3 kernel into its
// 2x2, 1x2, 2x1 and 1x1 parts. The 16-bit data width follows the published
// precision; the other defaults below are this implementation's choices.
package dtc_pkg;

  // Operating mode. A dense 3x3 convolution is MODE_DILATED with D = 0.
  typedef enum logic {
    MODE_DILATED    = 1'b0,
    MODE_TRANSPOSED = 1'b1
  } mode_e;

  localparam int unsigned DW_DEF     = 16;  // data and weight width (16-bit fixed point)
  localparam int unsigned N_DEF      = 14;  // rows of one PE block
  localparam int unsigned NBLK_DEF   = 4;   // PE blocks (4 x 14 x 3 = 168 MACs)
  localparam int unsigned ACC_W_DEF  = 40;  // accumulator width
  localparam int unsigned MAX_W_DEF  = 32;  // widest input tile, columns
  localparam int unsigned DMAX_DEF   = 15;  // largest number of inserted zeros D

  // Lane where row phase p starts when the (D+1) row phases of an H-row
  // column are stacked in one column vector, one zero lane between phases.
  // hq = H div (D+1), hr = H mod (D+1); phase p holds hq + (p < hr) rows, so
  // the offset is the sum over earlier phases of (rows + 1).
  function automatic int unsigned phase_offset(input int unsigned p, input int unsigned hq,
                                               input int unsigned hr);
    return p * (hq + 1) + ((p < hr) ? p : hr);
  endfunction

  // Index of kernel element W[row u][column v], u,v in 0..2, in the
  // row-major weight load order (wa1 wb1 wc1 wa2 wb2 wc2 wa3 wb3 wc3).
  function automatic int unsigned widx(input int unsigned u, input int unsigned v);
    return u * 3 + v;
  endfunction

endpackage
