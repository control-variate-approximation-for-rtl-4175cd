// perforated_mult: 8x8 unsigned partial-product-perforated multiplier.
//
// An array multiplier forms one partial product per activation bit, pp_i = A[i] ? W : 0,
// weighted by 2^i. Perforation drops the m least significant partial products
// (i = 0 .. m-1) before the accumulation tree, so only 8 - m rows are summed. Since every
// remaining row carries a factor 2^m, the result is returned already divided by 2^m:
//
//     p = W * A[7:m]          (16 - m bits)
//
// The exact product is p * 2^m + W * A[m-1:0]; the dropped term W * A[m-1:0] is the
// multiplication error that the control variate of the array corrects on average.
// Purely combinational. The row summation is written as a plain sum of the generated
// rows and left to synthesis to map onto an adder tree.
module perforated_mult #(
  parameter int unsigned M = cv_pkg::M_DEF
) (
  input  logic [cv_pkg::DW-1:0]   w,
  input  logic [cv_pkg::DW-1:0]   a,
  output logic [2*cv_pkg::DW-M-1:0] p
);
  import cv_pkg::*;

  localparam int unsigned PW = 2 * DW - M;

  if (M < 1 || M >= DW) begin : g_bad_m
    $error("perforated_mult: M must be in 1..7");
  end

  // Remaining partial products, rows M .. DW-1, already shifted to their weight 2^(i-M).
  logic [PW-1:0] pp [DW-M];

  for (genvar i = M; i < DW; i++) begin : g_pp
    assign pp[i-M] = a[i] ? (PW'(w) << (i - M)) : '0;
  end

  // The perforated activation bits A[m-1:0] generate no partial product.
  logic unused_lo;
  assign unused_lo = ^a[M-1:0];

  always_comb begin
    p = '0;
    for (int k = 0; k < int'(DW - M); k++) p = p + pp[k];
  end

endmodule
