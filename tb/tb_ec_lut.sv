// Test of the error-correction table: every entry, read back and
// complemented, must equal round(f(1-f)/(1+f) * 2^11) evaluated in real
// arithmetic at the lower end of its interval, f = a / 2^AW, and the output must be zero
// with en low. Run for the 2^5 table of the design and the 2^8 table.
module tb_ec_lut;
  import posit_ref_pkg::*;
  logic [4:0] addr5;
  logic [7:0] addr8;
  logic en;
  logic [8:0] q5, q8;
  logic clk = 1'b0;
  int checks = 0, failures = 0;

  ec_lut #(.AW(5), .DW(9), .FB(11)) dut5 (.addr(addr5), .en(en), .ec_n(q5));
  ec_lut #(.AW(8), .DW(9), .FB(11)) dut8 (.addr(addr8), .en(en), .ec_n(q8));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < 2; m++) begin
      for (int i = 0; i < 256; i++) begin
        en = m[0];
        addr5 = 5'(i);
        addr8 = 8'(i);
        @(posedge clk);
        #1;
        checks++;
        if (en) begin
          if (i < 32 && int'(9'(~q5)) != ref_ec(i, 5)) begin
            failures++;
            $display("AW=5 entry %0d: %0d expected %0d", i, int'(9'(~q5)), ref_ec(i, 5));
          end
          if (int'(9'(~q8)) != ref_ec(i, 8)) begin
            failures++;
            $display("AW=8 entry %0d: %0d expected %0d", i, int'(9'(~q8)), ref_ec(i, 8));
          end
        end else if (q5 != 0 || q8 != 0) begin
          failures++;
          $display("output not gated at addr %0d", i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
