// mac_star: the approximate MAC unit (MAC*) of the control-variate systolic array.
//
// Each MAC* holds four input registers, as in the accurate MAC plus one: the activation
// A, the weight W, the partial sum S and the perforated-bit sum X. From their outputs it
// computes, combinationally,
//
//     s_out = S + W * A[7:m]        (perforated product, sum kept m bits shorter)
//     x_out = X + A[m-1:0]          (ripple-carry adder, off the critical path)
//
// and forwards A (down the column, a_out) and W (along the row, w_out). A, S and X are
// captured every clock. W is a stationary weight: it is captured only while `load` is
// high, so the weights of a row can be shifted in from its left edge and then held while
// activations stream through. The hold-on-load behaviour is this design's choice; the
// unit's arithmetic, register set and forwarding follow the MAC* description.
//
// Timing: outputs are valid one clock after the inputs they depend on were presented.
// Reset (active-low, asynchronous) clears all four registers. An assertion flags a
// partial sum that would not fit its SW bits, which cannot happen inside the array.
module mac_star #(
  parameter int unsigned N = cv_pkg::N_DEF,
  parameter int unsigned M = cv_pkg::M_DEF,
  localparam int unsigned SW = cv_pkg::acc_width(N) - M,
  localparam int unsigned XW = cv_pkg::x_width(N, M)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  load,
  input  logic [cv_pkg::DW-1:0] a_in,
  input  logic [cv_pkg::DW-1:0] w_in,
  input  logic [SW-1:0]         s_in,
  input  logic [XW-1:0]         x_in,
  output logic [cv_pkg::DW-1:0] a_out,
  output logic [cv_pkg::DW-1:0] w_out,
  output logic [SW-1:0]         s_out,
  output logic [XW-1:0]         x_out
);
  import cv_pkg::*;

  localparam int unsigned PW = 2 * DW - M;

  logic [DW-1:0] a_q, w_q;
  logic [SW-1:0] s_q;
  logic [XW-1:0] x_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q <= '0;
      w_q <= '0;
      s_q <= '0;
      x_q <= '0;
    end else begin
      a_q <= a_in;
      s_q <= s_in;
      x_q <= x_in;
      if (load) w_q <= w_in;
    end
  end

  // Approximate product W * A[7:m].
  logic [PW-1:0] p;

  perforated_mult #(.M(M)) u_mul (
    .w(w_q),
    .a(a_q),
    .p(p)
  );

  // The sum is sized for the largest row sum, so it never carries out of SW bits.
  logic s_carry;
  assign {s_carry, s_out} = {1'b0, s_q} + (SW+1)'(p);

  a_no_sum_overflow: assert property (@(posedge clk) disable iff (!rst_n) !s_carry)
    else $error("mac_star: partial sum overflowed %0d bits", SW);

  // sumX_j = sumX_{j-1} + A[m-1:0]
  ripple_carry_adder #(.W(XW)) u_xadd (
    .a(x_q),
    .b(XW'(a_q[M-1:0])),
    .s(x_out)
  );

  assign a_out = a_q;
  assign w_out = w_q;

endmodule
