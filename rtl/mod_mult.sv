// mod_mult: modular multiplier r = (x * y) mod n.
//
// The W x W overlay multiplier forms the 2W-bit product, which the 2W-bit
// straight divider divides by the modulus, zero-extended to 2W bits; the
// remainder is the result. With the default W = 8 this is the pairing of an
// 8x8 overlay multiplier with a 16-bit by 16-bit Vedic divider. The quotient
// is not used. Joining the two units this way is this design's reading of
// "(m*m) mod n" and "(m*a) mod n" in the exponentiation loop.
//
// Interface: x, y, n (W bits) in, r (W bits) out. Purely combinational: one
// multiplier delay plus one divider delay. For n = 0 the divider's
// divide-by-zero rule makes r the low W bits of x*y.
module mod_mult #(
  parameter int unsigned W = rsa_pkg::OPER_W
) (
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  input  logic [W-1:0] n,
  output logic [W-1:0] r
);
  logic [2*W-1:0] prod;
  logic [2*W-1:0] rem;      // only its low W bits can be non-zero (rem < n)

  overlay_mult #(.N(W)) u_mult (
    .x (x),
    .y (y),
    .p (prod)
  );

  vedic_divider #(.N(2 * W)) u_div (
    .dividend  (prod),
    .divisor   ((2*W)'(n)),
    .quotient  (),
    .remainder (rem)
  );

  assign r = rem[W-1:0];
endmodule
