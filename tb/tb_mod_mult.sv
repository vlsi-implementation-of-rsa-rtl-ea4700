// tb_mod_mult: self-check of the modular multiplier (x*y) mod n against the
// integer model: all x with every third y for six moduli (1, 2, 77, 143,
// 251, 255), then random triples. It also counts, with an independent model
// of the straight division, the products whose head-only trial quotient digit
// had to be corrected, and fails if the correction never occurred: in this
// datapath the divisor is an 8-bit modulus inside a 16-bit divider.
module tb_mod_mult;
  logic       clk = 1'b0;
  logic [7:0] x, y, n, r;
  int unsigned checks = 0, failures = 0, corrected = 0;

  mod_mult dut (.x(x), .y(y), .n(n), .r(r));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("products whose trial quotient digit was corrected: %0d", corrected);
    checks++;
    if (corrected == 0) begin
      failures++;
      $display("ADJUST correction never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // 1 if some step of the 16/16 straight division of p by md has a trial
  // digit (top part / 4-bit head) above the true digit.
  function automatic bit needs_adjust(input logic [15:0] p, input logic [7:0] md);
    int s;
    logic [15:0] dn;
    logic [31:0] xn;
    longint r, t;
    s = 0;
    for (int i = 0; i < 16; i++) if (16'(md) >> i != 0) s = 15 - i;
    dn = 16'(md) << s;
    xn = 32'(p) << s;
    r = 0;
    for (int k = 7; k >= 0; k--) begin
      t = r * 16 + longint'(xn[4*k +: 4]);
      if ((t >> 12) / longint'(dn[15:12]) > t / longint'(dn)) return 1'b1;
      r = t % longint'(dn);
    end
    return 1'b0;
  endfunction

  task automatic check(input logic [7:0] xa, input logic [7:0] ya, input logic [7:0] na);
    logic [7:0] r_exp;
    x = xa;
    y = ya;
    n = na;
    #1;
    r_exp = 8'((32'(xa) * 32'(ya)) % 32'(na));
    if (na != 0 && needs_adjust(16'(32'(xa) * 32'(ya)), na)) corrected++;
    checks++;
    if (r !== r_exp) begin
      failures++;
      if (failures < 10) $display("mismatch (%0d*%0d) mod %0d: got %0d want %0d", xa, ya, na, r, r_exp);
    end
  endtask

  initial begin
    int unsigned mods [6] = '{1, 2, 77, 143, 251, 255};
    foreach (mods[k]) begin
      for (int i = 0; i < 256; i++) begin
        for (int j = 0; j < 256; j += 3) check(8'(i), 8'(j), 8'(mods[k]));
        @(posedge clk);
      end
    end
    for (int t = 0; t < 20000; t++) check(8'($urandom), 8'($urandom), 8'($urandom_range(1, 255)));
    $display("products whose trial quotient digit was corrected: %0d", corrected);
    checks++;
    if (corrected == 0) begin
      failures++;
      $display("ADJUST correction never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
