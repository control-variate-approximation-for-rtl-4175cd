// cv_pkg: shared constants and width functions of the control-variate MAC array.
//
// The array works on 8-bit unsigned weights W and activations A. Perforating the
// m least partial products of each multiplier removes A[m-1:0] from the product, and
// the control variate V = C * sum(A[m-1:0]) puts an estimate of what was removed back
// at the end of each row (C is the mean weight of the filter held by that row).
//
// Widths follow the sizing rules of the design:
//   accumulator width  ACC_W = ceil(log2(N * (2^16 - 1)))   (22 bits for N = 64)
//   MAC* sum width     ACC_W - m                              (20 bits for N = 64, m = 2)
//   sumX width         XW    = ceil(log2(N * (2^m - 1)))      (8 bits for N = 64, m = 2)
// Here ceil(log2(x)) is taken as $clog2(x + 1), the number of bits that hold the value x
// itself. The two agree except when x is an exact power of two (N = 64, m = 1 gives
// x = 64, which needs 7 bits, not 6); this design uses the safe form.
package cv_pkg;

  // Operand width of the multipliers (8-bit weights and activations).
  localparam int unsigned DW = 8;

  // Default configuration: a 64x64 array with m = 2 perforated partial products.
  localparam int unsigned N_DEF = 64;
  localparam int unsigned M_DEF = 2;

  // Bits of the final row result G* and of the accurate accumulator.
  function automatic int unsigned acc_width(input int unsigned n);
    return $clog2(n * ((1 << (2 * DW)) - 1) + 1);
  endfunction

  // Bits of the sumX chain that adds the m perforated activation bits of one row.
  function automatic int unsigned x_width(input int unsigned n, input int unsigned m);
    return $clog2(n * ((1 << m) - 1) + 1);
  endfunction

endpackage
