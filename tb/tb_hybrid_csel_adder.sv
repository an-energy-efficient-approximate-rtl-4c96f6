// Test of the 13-bit hybrid carry-select adder: directed carry-chain corners
// and random operands, sum = (a + b + cin) mod 2^13.
module tb_hybrid_csel_adder;
  logic [12:0] a, b, sum;
  logic cin;
  logic clk = 1'b0;
  int checks = 0, failures = 0;

  hybrid_csel_adder #(.W(13), .LW(6)) dut (.a(a), .b(b), .cin(cin), .sum(sum));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (300_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(int x, int y, int c);
    a = 13'(x);
    b = 13'(y);
    cin = c[0];
    @(posedge clk);
    #1;
    checks++;
    if (sum != 13'(x + y + c)) begin
      failures++;
      if (failures < 10) $display("a=%h b=%h cin=%0b sum=%h", a, b, cin, sum);
    end
  endtask

  initial begin
    one('h1FFF, 0, 1);
    one('h003F, 0, 1);
    one('h0FFF, 1, 0);
    one('h1FC0, 'h0040, 0);
    one('h1555, 'h0AAA, 1);
    for (int n = 0; n < 200_000; n++) one($urandom % 8192, $urandom % 8192, $urandom % 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
