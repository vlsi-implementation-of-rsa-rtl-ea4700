// tb_vedic_divider: self-check of the 16-bit straight divider against the
// integer / and % operators. Covers the decimal worked example 35001 / 77
// (quotient 454, remainder 43), divisors of every length from 1 to 16 bits,
// divisors whose flag digit is large (the cases where the trial digit from
// the head overshoots most), divide by zero, and random operands. It also
// counts the operand pairs whose trial digit needed one and two ADJUST
// corrections, so that both are known to have been exercised. An 8-bit instance
// is checked over all 65536 operand pairs.
module tb_vedic_divider;
  localparam int unsigned N = 16;
  logic         clk = 1'b0;
  logic [N-1:0] dividend, divisor, quotient, remainder;
  int unsigned  checks = 0, failures = 0, adjusted = 0, adjusted2 = 0;

  vedic_divider dut (.dividend(dividend), .divisor(divisor),
                     .quotient(quotient), .remainder(remainder));

  // A second, 8-bit instance (4-bit digits), checked exhaustively, shows the
  // method at another width.
  logic [7:0] dv8, ds8, q8, r8;
  vedic_divider #(.N(8)) dut8 (.dividend(dv8), .divisor(ds8), .quotient(q8), .remainder(r8));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference model, independent of the digit method.
  task automatic check(input logic [N-1:0] x, input logic [N-1:0] d);
    logic [N-1:0] q_exp, r_exp;
    dividend = x;
    divisor  = d;
    #1;
    if (d == 0) begin
      q_exp = '1;
      r_exp = x;
    end else begin
      q_exp = x / d;
      r_exp = x % d;
    end
    checks++;
    if (quotient !== q_exp || remainder !== r_exp) begin
      failures++;
      if (failures < 10)
        $display("mismatch %0d/%0d: got q=%0d r=%0d want q=%0d r=%0d",
                 x, d, quotient, remainder, q_exp, r_exp);
    end
  endtask

  // How many corrections the trial digit of the worst step needs, from an
  // independent model: trial = floor(top part / head digit), true digit =
  // floor(T / divisor), with normalised operands and 4-bit digits.
  function automatic int max_adjust(input logic [N-1:0] x, input logic [N-1:0] d);
    int s, best;
    logic [2*N-1:0] xn;
    logic [N-1:0] dn;
    longint r, t, y0, zt, ztrue;
    s = 0;
    for (int i = 0; i < N; i++) if (d[i]) s = N - 1 - i;
    dn = d << s;
    xn = (2*N)'(x) << s;
    y0 = longint'(dn[N-1 -: 4]);
    r = 0;
    best = 0;
    for (int k = 2*N/4 - 1; k >= 0; k--) begin
      t = r * 16 + longint'(xn[4*k +: 4]);
      zt = (t >> (N - 4)) / y0;
      ztrue = t / longint'(dn);
      if (int'(zt - ztrue) > best) best = int'(zt - ztrue);
      r = t % longint'(dn);
    end
    return best;
  endfunction

  initial begin
    check(16'd35001, 16'd77);
    check(16'd0, 16'd1);
    check(16'hFFFF, 16'd1);
    check(16'hFFFF, 16'hFFFF);
    check(16'h1234, 16'd0);
    check(16'd5, 16'd9);
    for (int len = 1; len <= N; len++) begin
      for (int t = 0; t < 200; t++) begin
        logic [N-1:0] d;
        d = N'($urandom) & N'((1 << len) - 1);
        d[len-1] = 1'b1;
        check(N'($urandom), d);
      end
    end
    // Small head, large flag: trial digits that overshoot the most.
    for (int t = 0; t < 3000; t++) begin
      logic [N-1:0] d, x;
      d = {1'b1, 7'($urandom), 8'hFF - 8'($urandom_range(0, 15))};
      x = N'($urandom);
      begin
        if (max_adjust(x, d) >= 1) adjusted++;
        if (max_adjust(x, d) >= 2) adjusted2++;
      end
      check(x, d);
    end
    for (int t = 0; t < 20000; t++) begin
      logic [N-1:0] d, x;
      x = N'($urandom);
      d = N'($urandom) >> $urandom_range(0, 15);
      if (d != 0) begin
        if (max_adjust(x, d) >= 1) adjusted++;
        if (max_adjust(x, d) >= 2) adjusted2++;
      end
      check(x, d);
    end
    for (int i = 0; i < 256; i++) begin
      for (int k = 0; k < 256; k++) begin
        dv8 = 8'(i);
        ds8 = 8'(k);
        #1;
        checks++;
        if (k == 0 ? (q8 !== 8'hFF || r8 !== 8'(i)) : (q8 !== 8'(i / k) || r8 !== 8'(i % k))) begin
          failures++;
          if (failures < 10) $display("8-bit mismatch %0d/%0d: got q=%0d r=%0d", i, k, q8, r8);
        end
      end
      @(posedge clk);
    end
    $display("operand pairs needing an ADJUST correction: %0d, two corrections: %0d", adjusted, adjusted2);
    checks++;
    if (adjusted == 0 || adjusted2 == 0) begin
      failures++;
      $display("single or double ADJUST correction never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
