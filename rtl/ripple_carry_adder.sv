// ripple_carry_adder: W-bit adder built as a chain of full adders, no carry in, carry
// out dropped (the caller sizes W so that the sum cannot overflow).
//
// The sumX chain of a MAC* unit runs in parallel with the product/sum path and is not on
// the critical path, so the slowest and smallest adder form, a ripple-carry chain, is used
// for it, as the design suggests. Bit 0 has no carry in and reduces to a half adder.
// Purely combinational.
module ripple_carry_adder #(
  parameter int unsigned W = 8
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] s
);

  logic [W:0] c;

  assign c[0] = 1'b0;

  for (genvar i = 0; i < W; i++) begin : g_fa
    assign s[i]   = a[i] ^ b[i] ^ c[i];
    assign c[i+1] = (a[i] & b[i]) | (c[i] & (a[i] ^ b[i]));
  end

  // The final carry is unused by construction: W holds the largest possible sum.
  logic unused_carry;
  assign unused_carry = c[W];

endmodule
