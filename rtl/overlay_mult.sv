// overlay_mult: N x N bit hierarchical overlay multiplier (vertical and
// crosswise on 4-bit groups).
//
// Both operands are cut into G = N/4 groups of four bits, X(G-1)..X0 and
// Y(G-1)..Y0. Every pair Xi*Yj is formed by its own mul4x4 cell, all in
// parallel. Cross product k (k = 0 .. 2G-2) is the sum of the sub-products
// with i + j = k: for N = 16 these are the seven sums A..G of
//   A = X0Y0, B = X1Y0+X0Y1, C = X2Y0+X0Y2+X1Y1, D = X3Y0+X0Y3+X2Y1+X1Y2,
//   E = X3Y1+X1Y3+X2Y2, F = X3Y2+X2Y3, G = X3Y3.
// The cross products are weighted by 2^(4k) and added into the 2N-bit
// product. The grouping and the cross products follow the overlay scheme;
// the final addition is only called "an efficient method of addition", so a
// plain sum of the shifted cross products is used here.
//
// Interface: x, y (N bits) in, p (2N bits) out. N must be a multiple of 4.
// Purely combinational.
module overlay_mult #(
  parameter int unsigned N = rsa_pkg::OPER_W
) (
  input  logic [N-1:0]   x,
  input  logic [N-1:0]   y,
  output logic [2*N-1:0] p
);
  localparam int unsigned G  = N / 4;      // number of 4-bit groups
  localparam int unsigned NK = 2 * G - 1;  // number of cross products

  initial begin
    assert (N % 4 == 0 && N >= 4) else $fatal(1, "overlay_mult: N must be a multiple of 4");
  end

  logic [7:0] sub [G][G];   // sub[i][j] = Xi * Yj

  for (genvar i = 0; i < G; i++) begin : g_x
    for (genvar j = 0; j < G; j++) begin : g_y
      mul4x4 u_mul (.a(x[4*i +: 4]), .b(y[4*j +: 4]), .p(sub[i][j]));
    end
  end

  // Cross products: a sum of up to G 8-bit terms needs 8 + clog2(G) bits.
  localparam int unsigned CPW = 8 + $clog2(G + 1);
  logic [CPW-1:0] cp [NK];

  always_comb begin
    for (int k = 0; k < NK; k++) begin
      cp[k] = '0;
      for (int i = 0; i < G; i++) begin
        if (k - i >= 0 && k - i < G) cp[k] = cp[k] + CPW'(sub[i][k - i]);
      end
    end
  end

  always_comb begin
    logic [2*N+CPW-1:0] acc;
    acc = '0;
    for (int k = 0; k < NK; k++) begin
      acc = acc + ((2*N+CPW)'(cp[k]) << (4 * k));
    end
    p = acc[2*N-1:0];
  end
endmodule
