// mul4x4: 4x4-bit unsigned multiply module, the leaf cell of the overlay
// multiplier.
//
// The product is formed column by column with the vertical-and-crosswise
// (Urdhva Tiryakbhyam) pattern applied to single bits: column c collects the
// bit products a[i]&b[j] with i+j = c plus the carry from column c-1; its
// least significant bit is product bit c and the rest is carried on. Seven
// columns (1,2,3,4,3,2,1 cross products) give bits 0..6 and the last carry is
// bit 7. The overlay architecture only says that each sub-product comes from
// an "embedded parallel 4x4 multiply module"; forming that module with the
// same crosswise rule at bit level is this design's choice.
//
// Interface: a, b (4 bits each) in, p (8 bits) out. Purely combinational.
module mul4x4 (
  input  logic [3:0] a,
  input  logic [3:0] b,
  output logic [7:0] p
);
  always_comb begin
    logic [3:0] col;   // column sum: at most 4 products + carry 3 = 7
    logic [2:0] carry;
    carry = '0;
    p     = '0;
    for (int c = 0; c < 7; c++) begin
      col = 4'(carry);
      for (int i = 0; i < 4; i++) begin
        if (c - i >= 0 && c - i < 4) col = col + 4'(a[i] & b[c - i]);
      end
      p[c]  = col[0];
      carry = col[3:1];
    end
    p[7] = carry[0];
  end
endmodule
