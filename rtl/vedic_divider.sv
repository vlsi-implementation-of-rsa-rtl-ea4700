// vedic_divider: N-bit by N-bit unsigned divider using the Straight
// (Dhvajanka, "at sight") division method in binary.
//
// Method. The divisor is split into a head digit Y0 (its top DW bits) and a
// flag Y1 (the remaining FW = N - DW bits), so divisor = Y0 * 2^FW + Y1. The
// dividend is brought down DW bits at a time, most significant first. Each
// step forms T = R * 2^DW + E from the running remainder R and the next
// dividend digit E and splits it as T = K * 2^FW + L. The short division of
// K by the head digit alone gives a trial quotient digit Z and remainder C.
// ADJUST then lowers Z (and raises C by Y0) while C * 2^FW + L < Y1 * Z, and
// the new running remainder is C * 2^FW + L - Y1 * Z, which is T - Z *
// divisor. After the last digit the running remainder is the remainder.
// Every step is thus a division of a 2*DW-bit number by one DW-bit digit
// (small enough to be done "at sight", here with / and %) plus a flag
// correction, and all steps have the same shape.
//
// Binary adaptation (this design's own): the source explains the method in
// decimal with a one-digit head and a one-digit flag. Here the digit is DW =
// 4 bits, the grouping also used by the overlay multiplier, and the flag is
// the rest of the divisor taken as one number. The divisor is first
// normalised, shifted left until its top bit is set, so the head digit is at
// least 2^(DW-1); the dividend is shifted by the same amount into 2N bits
// (2N/DW digits) and the remainder shifted back at the end. With a
// normalised head the trial digit exceeds the true one by less than
// 2^DW / Y0 <= 2, so ADJUST is two conditional corrections, not a loop.
//
// The ADJUST loop is written in the source with the roles of the two divisor
// parts swapped (compare against Y0*Z, add Y1); its worked example has
// Y0 = Y1 and cannot tell them apart. Only the form used here (compare
// against Y1*Z, add Y0) yields T - Z*divisor, so it is followed. The final
// remainder is likewise formed with the last quotient digit. Division by
// zero returns an all-ones quotient and the dividend as remainder.
//
// Interface: dividend, divisor (N bits) in; quotient, remainder (N bits)
// out. N > DW and 2N a multiple of DW. Purely combinational: 2N/DW digit
// stages in series.
module vedic_divider #(
  parameter int unsigned N  = rsa_pkg::DIV_W,
  parameter int unsigned DW = rsa_pkg::DIGIT_W
) (
  input  logic [N-1:0] dividend,
  input  logic [N-1:0] divisor,
  output logic [N-1:0] quotient,
  output logic [N-1:0] remainder
);
  localparam int unsigned FW      = N - DW;        // flag width
  localparam int unsigned NS      = 2 * N / DW;    // digit steps
  localparam int unsigned MAX_ADJ = 2;             // ADJUST steps needed with a normalised head
  localparam int unsigned WW      = N + DW + 2;    // working width of the step arithmetic

  initial begin
    assert (N > DW && (2 * N) % DW == 0) else $fatal(1, "vedic_divider: need N > DW and DW dividing 2N");
  end

  // Leading-zero count of the divisor: the normalising shift.
  logic [$clog2(N)-1:0] shift;
  always_comb begin
    shift = '0;
    for (int i = 0; i < N; i++) begin
      if (divisor[i]) shift = $clog2(N)'(N - 1 - i);
    end
  end

  logic [N-1:0]   dnorm;   // normalised divisor, top bit set
  logic [2*N-1:0] xnorm;   // dividend shifted by the same amount
  logic [DW-1:0]  y0;      // head digit
  logic [FW-1:0]  y1;      // flag
  assign dnorm = divisor << shift;
  assign xnorm = (2*N)'(dividend) << shift;
  assign y0    = dnorm[N-1 -: DW];
  assign y1    = dnorm[FW-1:0];

  logic [2*N-1:0] q_raw;
  logic [N-1:0]   r_norm;

  always_comb begin
    logic [WW-1:0]   r, t, l, c, lhs, rhs;
    logic [2*DW-1:0] k;
    logic [DW+1:0]   z;
    r     = '0;
    q_raw = '0;
    for (int s = NS - 1; s >= 0; s--) begin
      // Bring down the next dividend digit and split off the top part.
      t = (r << DW) | WW'(xnorm[DW*s +: DW]);
      k = (2*DW)'(t >> FW);
      l = t & ((WW'(1) << FW) - 1'b1);
      // Straight division step: divide by the head digit only.
      z = (DW+2)'(k / (2*DW)'(y0));
      c = WW'(k % (2*DW)'(y0));
      // ADJUST: while (C*2^FW + L) < Y1*Z { Z = Z-1; C = C+Y0 }
      for (int a = 0; a < MAX_ADJ; a++) begin
        lhs = (c << FW) + l;
        rhs = WW'(y1) * WW'(z);
        if (lhs < rhs) begin
          z = z - 1'b1;
          c = c + WW'(y0);
        end
      end
      // New running remainder (after the last digit: the remainder).
      r     = (c << FW) + l - WW'(y1) * WW'(z);
      q_raw = q_raw | ((2*N)'(z[DW-1:0]) << (DW * s));
    end
    r_norm = N'(r);
  end

  always_comb begin
    if (divisor == '0) begin
      quotient  = '1;
      remainder = dividend;
    end else begin
      quotient  = q_raw[N-1:0];
      remainder = r_norm >> shift;
    end
  end
endmodule
