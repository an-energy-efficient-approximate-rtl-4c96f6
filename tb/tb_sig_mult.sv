// Test of the significand multiplier: every pair of 12-bit significands with
// the hidden bit set (2^22 pairs) plus random operands with a nonzero
// multiplicand (a zero multiplicand never occurs: the hidden bit is set); the
// output must be bits [23:11] of the exact product a * b.
module tb_sig_mult;
  logic [11:0] a, b;
  logic [12:0] prod;
  logic clk = 1'b0;
  int checks = 0, failures = 0;

  sig_mult #(.W(12)) dut (.a(a), .b(b), .prod(prod));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(int x, int y);
    a = 12'(x);
    b = 12'(y);
    @(posedge clk);
    #1;
    checks++;
    if (prod != 13'((x * y) >> 11)) begin
      failures++;
      if (failures < 10) $display("a=%h b=%h prod=%h expected %h", a, b, prod, 13'((x * y) >> 11));
    end
  endtask

  initial begin
    for (int x = 2048; x < 4096; x++)
      for (int y = 2048; y < 4096; y++)
        one(x, y);
    for (int n = 0; n < 100_000; n++) one(1 + $urandom % 4095, $urandom % 4096);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
