// tb_overlay_mult: self-check of the overlay multiplier. The default 8x8
// size is checked exhaustively (65536 pairs); a 16x16 instance, the size of
// the cross-product table, is checked with corner and random operands.
module tb_overlay_mult;
  logic        clk = 1'b0;
  logic [7:0]  x8, y8;
  logic [15:0] p8;
  logic [15:0] x16, y16;
  logic [31:0] p16;
  int unsigned checks = 0, failures = 0;

  overlay_mult                dut8  (.x(x8),  .y(y8),  .p(p8));
  overlay_mult #(.N(16))      dut16 (.x(x16), .y(y16), .p(p16));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check16(input logic [15:0] xa, input logic [15:0] yb);
    logic [31:0] exp_p;
    x16 = xa;
    y16 = yb;
    #1;
    exp_p = 32'(xa) * 32'(yb);
    checks++;
    if (p16 !== exp_p) begin
      failures++;
      $display("16x16 mismatch %0d*%0d: got %0d want %0d", xa, yb, p16, exp_p);
    end
  endtask

  initial begin
    x16 = '0;
    y16 = '0;
    for (int i = 0; i < 256; i++) begin
      for (int k = 0; k < 256; k++) begin
        x8 = 8'(i);
        y8 = 8'(k);
        #1;
        checks++;
        if (p8 !== 16'(i * k)) begin
          failures++;
          if (failures < 10) $display("8x8 mismatch %0d*%0d: got %0d", i, k, p8);
        end
      end
      @(posedge clk);
    end
    check16(16'hFFFF, 16'hFFFF);
    check16(16'h0000, 16'hFFFF);
    check16(16'h8000, 16'h8000);
    check16(16'h1234, 16'h5678);
    for (int t = 0; t < 20000; t++) check16(16'($urandom), 16'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
