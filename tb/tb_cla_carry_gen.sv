// Exhaustive test of the 7-bit carry generator: cout = bit 7 of a + b.
module tb_cla_carry_gen;
  logic [6:0] a, b;
  logic cout;
  logic clk = 1'b0;
  int checks = 0, failures = 0;

  cla_carry_gen #(.W(7)) dut (.a(a), .b(b), .cout(cout));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x < 128; x++) begin
      for (int y = 0; y < 128; y++) begin
        a = 7'(x);
        b = 7'(y);
        @(posedge clk);
        #1;
        checks++;
        if (cout != ((x + y) >= 128)) begin
          failures++;
          if (failures < 10) $display("a=%0d b=%0d cout=%0b", x, y, cout);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
