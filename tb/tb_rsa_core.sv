// tb_rsa_core: end-to-end test of the RSA engine at its default sizes
// (8-bit text and modulus, 8-bit exponent).
//
// For three textbook key pairs, (n, e, d) = (143, 7, 103), (221, 5, 77) and
// (15, 3, 3), every message below n is encrypted and the cipher text
// decrypted again; both results are compared with a software square-and-
// multiply model, the decrypted text with the message. Random base, exponent
// and modulus triples follow, including exponent 0, all-ones and n = 1.
// Each run checks the result, the rebuilt exponent l = b and the latency of
// EXP_W + popcount(b) cycles. The test also counts the mechanisms of the
// engine (squaring steps, multiply steps, bits whose multiply is skipped, a
// start ignored while busy, back-to-back restarts from done) and fails if any
// of them never occurred.
module tb_rsa_core;
  localparam int unsigned W = 8, EXP_W = 8;
  logic             clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [W-1:0]     a, n, m;
  logic [EXP_W-1:0] b, l;
  logic             busy, done;
  int unsigned checks = 0, failures = 0, n_skip = 0;
  int unsigned n_square = 0, n_mult = 0, n_ignored = 0, n_enc = 0, n_dec = 0;

  rsa_core dut (.clk(clk), .rst_n(rst_n), .start(start), .a(a), .b(b), .n(n),
                .m(m), .l(l), .busy(busy), .done(done));

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Mechanism counters, from the ports alone: every busy cycle is one step;
  // a multiply step leaves the rebuilt exponent l odd, a squaring leaves it
  // even. A squaring not followed by a multiply is a skipped multiply.
  logic was_busy = 1'b0;
  always @(negedge clk) begin
    if (rst_n && was_busy) begin
      if (l[0]) n_mult++;
      else      n_square++;
    end
    was_busy <= rst_n && busy;
  end

  function automatic logic [W-1:0] ref_modexp(input logic [W-1:0] base, input logic [EXP_W-1:0] e,
                                              input logic [W-1:0] md);
    longint r;
    r = 1;
    for (int j = EXP_W - 1; j >= 0; j--) begin
      r = (r * r) % longint'(md);
      if (e[j]) r = (r * longint'(base)) % longint'(md);
    end
    return W'(r);
  endfunction

  task automatic run(input logic [W-1:0] ta, input logic [EXP_W-1:0] tb_, input logic [W-1:0] tn,
                     output logic [W-1:0] res, input bit poke_busy);
    int cycles;
    logic [W-1:0] want;
    @(negedge clk);
    a = ta;
    b = tb_;
    n = tn;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cycles = 0;  // the edge that sampled start is not counted
    if (poke_busy) begin
      // A second start with other operands while busy must be ignored.
      a = ~ta;
      b = ~tb_;
      n = 8'd7;
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cycles++;
      if (busy || done) n_ignored++;
    end
    while (!done) begin
      @(negedge clk);
      cycles++;
      if (cycles > 100) break;
    end
    res  = m;
    want = ref_modexp(ta, tb_, tn);
    checks++;
    if (m !== want) begin
      failures++;
      $display("result mismatch %0d^%0d mod %0d: got %0d want %0d", ta, tb_, tn, m, want);
    end
    checks++;
    if (l !== tb_) begin
      failures++;
      $display("rebuilt exponent %0d, want %0d", l, tb_);
    end
    checks++;
    if (cycles != EXP_W + $countones(tb_)) begin
      failures++;
      $display("latency %0d cycles for exponent %0d, want %0d", cycles, tb_, EXP_W + $countones(tb_));
    end
  endtask

  initial begin
    automatic int unsigned keys [3][3] = '{'{143, 7, 103}, '{221, 5, 77}, '{15, 3, 3}};
    logic [W-1:0] c, p;
    a = '0;
    b = '0;
    n = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    checks++;
    if (busy || done) begin
      failures++;
      $display("engine not idle after reset");
    end
    for (int k = 0; k < 3; k++) begin
      for (int msg = 0; msg < keys[k][0]; msg++) begin
        run(W'(msg), EXP_W'(keys[k][1]), W'(keys[k][0]), c, msg == 5);
        n_enc++;
        run(c, EXP_W'(keys[k][2]), W'(keys[k][0]), p, 1'b0);
        n_dec++;
        checks++;
        if (p !== W'(msg)) begin
          failures++;
          $display("round trip failed: n=%0d msg=%0d cipher=%0d back=%0d", keys[k][0], msg, c, p);
        end
      end
    end
    run(8'd200, 8'd0, 8'd251, c, 1'b0);
    run(8'd255, 8'hFF, 8'd255, c, 1'b0);
    run(8'd123, 8'd45, 8'd1, c, 1'b0);
    for (int t = 0; t < 2000; t++) begin
      run(W'($urandom), EXP_W'($urandom), W'($urandom_range(1, 255)), c, 1'b0);
    end
    n_skip = n_square - n_mult;
    checks++;
    if (n_square == 0 || n_mult == 0 || n_skip == 0 || n_ignored == 0 || n_enc == 0 || n_dec == 0) begin
      failures++;
      $display("a mechanism never occurred");
    end
    $display("squarings=%0d multiplies=%0d skipped_multiplies=%0d ignored_starts=%0d encryptions=%0d decryptions=%0d",
             n_square, n_mult, n_skip, n_ignored, n_enc, n_dec);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
