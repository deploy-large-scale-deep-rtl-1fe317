// mm_pkg: constants and sizing functions shared by the low-precision matrix
// multiplier (CU, CU array, input and parameter stream controllers, top).
//
// The defaults describe the 8x2 configuration: 8-bit weights ("Wp") and
// 2-bit quantized input codes ("Wi") on a 4x4 grid of computing units.
// The 8x4 and 8x8 configurations are obtained by overriding WI.
// K_MAX, the longest dot product one job can hold, is sized for the
// largest convolution kernel of VGG-16 (3x3x512 = 4608 products); that size
// is this design's choice, the kernel shape is common knowledge about VGG-16.
package mm_pkg;

  localparam int unsigned ROWS_DEF  = 4;     // CU rows, one per ISC bus
  localparam int unsigned COLS_DEF  = 4;     // CU columns, one per PSC bus
  localparam int unsigned WP_DEF    = 8;     // weight width
  localparam int unsigned WI_DEF    = 2;     // quantized input width
  localparam int unsigned K_MAX_DEF = 4608;  // longest dot product per job

  // CU latency from operands to accumulated result: 2 cycles for inputs of
  // up to 2 bits, 3 cycles for wider inputs (an extra operand register
  // stage in front of the wider multiplier).
  function automatic int unsigned cu_latency(int unsigned wi);
    return (wi <= 2) ? 2 : 3;
  endfunction

  // Accumulator width that cannot overflow: signed product of a WP-bit
  // signed weight and a WI-bit unsigned code (WP+WI bits) grown by
  // clog2(k_max) bits for the sum of k_max products.
  function automatic int unsigned acc_width(int unsigned wp, int unsigned wi,
                                            int unsigned k_max);
    return wp + wi + $clog2(k_max);
  endfunction

endpackage
