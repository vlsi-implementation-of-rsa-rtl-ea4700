// tb_mul4x4: exhaustive self-check of the 4x4 crosswise multiply cell.
// All 256 operand pairs are applied and compared with the integer product.
module tb_mul4x4;
  logic       clk = 1'b0;
  logic [3:0] a, b;
  logic [7:0] p;
  int unsigned checks = 0, failures = 0;

  mul4x4 dut (.a(a), .b(b), .p(p));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) begin
      for (int k = 0; k < 16; k++) begin
        a = 4'(i);
        b = 4'(k);
        @(posedge clk);
        checks++;
        if (p != 8'(i * k)) begin
          failures++;
          $display("mismatch %0d*%0d: got %0d", i, k, p);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
