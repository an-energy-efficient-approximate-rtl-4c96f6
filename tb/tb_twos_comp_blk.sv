// Exhaustive test of the 2's complement block: all 14-bit inputs, with sel
// low the row must pass unchanged, with sel high it must equal -a mod 2^14.
module tb_twos_comp_blk;
  logic [13:0] a, s;
  logic sel;
  logic clk = 1'b0;
  int checks = 0, failures = 0;

  twos_comp_blk #(.W(14)) dut (.a(a), .sel(sel), .s(s));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < 2; m++) begin
      for (int v = 0; v < (1 << 14); v++) begin
        a = 14'(v);
        sel = m[0];
        @(posedge clk);
        #1;
        checks++;
        if (s != (sel ? 14'(-v) : 14'(v))) begin
          failures++;
          if (failures < 10) $display("a=%h sel=%0b s=%h", a, sel, s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
