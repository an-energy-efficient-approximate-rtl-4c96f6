// Exhaustive test of the leading bit counter: every 15-bit input, count
// compared with a run length counted bit by bit from the MSB.
module tb_lbc;
  logic [14:0] din;
  logic [3:0]  count;
  logic clk = 1'b0;
  int checks = 0, failures = 0;

  lbc #(.W(15), .CW(4)) dut (.din(din), .count(count));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < (1 << 15); v++) begin
      int run;
      din = 15'(v);
      @(posedge clk);
      #1;
      run = 0;
      for (int i = 14; i >= 0; i--) begin
        if (din[i] != din[14]) break;
        run++;
      end
      checks++;
      if (int'(count) != run) begin
        failures++;
        if (failures < 10) $display("din=%b count=%0d expected %0d", din, count, run);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
