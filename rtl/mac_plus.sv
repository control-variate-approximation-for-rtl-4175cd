// mac_plus: the control-variate unit (MAC+) at the end of every row of the array.
//
// It registers the row's finished approximate sum S = sum_N (already m bits short), the
// m low bias bits B[m-1:0] that the row's first MAC* could not take, the perforated-bit
// sum X = sumX_N and the row's constant C = E[W] (the rounded mean weight of the filter
// held in the row). From the registers it computes, combinationally,
//
//     V  = C * X                          (accurate XW x 8 multiplier)
//     G* = {S, B[m-1:0]} + V              (full-width adder, ACC_W bits)
//
// Concatenating S with B[m-1:0] both shifts the perforated sum back to its true weight
// and restores the missing low bias bits. C is forwarded to the MAC+ of the next row
// (c_out); like the weights of the MAC* units it is captured only while `load` is high,
// so the C values of all rows are shifted in from the top of the column and then held.
// The hold-on-load behaviour and the separate B[m-1:0] input are this design's choices;
// the arithmetic follows the MAC+ description.
//
// Timing: one register stage, so the array's latency grows by one clock over an
// accurate array. Reset (active-low, asynchronous) clears all registers. An assertion
// flags a result that would not fit its ACC_W bits.
module mac_plus #(
  parameter int unsigned N = cv_pkg::N_DEF,
  parameter int unsigned M = cv_pkg::M_DEF,
  localparam int unsigned AW = cv_pkg::acc_width(N),
  localparam int unsigned SW = AW - M,
  localparam int unsigned XW = cv_pkg::x_width(N, M)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  load,
  input  logic [cv_pkg::DW-1:0] c_in,
  input  logic [SW-1:0]         s_in,
  input  logic [M-1:0]          b_lo_in,
  input  logic [XW-1:0]         x_in,
  output logic [cv_pkg::DW-1:0] c_out,
  output logic [AW-1:0]         g_out
);
  import cv_pkg::*;

  logic [DW-1:0] c_q;
  logic [SW-1:0] s_q;
  logic [M-1:0]  b_q;
  logic [XW-1:0] x_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_q <= '0;
      s_q <= '0;
      b_q <= '0;
      x_q <= '0;
    end else begin
      s_q <= s_in;
      b_q <= b_lo_in;
      x_q <= x_in;
      if (load) c_q <= c_in;
    end
  end

  // V = C * sumX_N
  logic [XW+DW-1:0] v;
  assign v = (XW+DW)'(x_q) * (XW+DW)'(c_q);

  // G* cannot exceed the largest exact row result, so the adder never carries out.
  logic g_carry;
  assign {g_carry, g_out} = {1'b0, s_q, b_q} + (AW+1)'(v);

  a_no_result_overflow: assert property (@(posedge clk) disable iff (!rst_n) !g_carry)
    else $error("mac_plus: G* overflowed %0d bits", AW);
  assign c_out = c_q;

endmodule
