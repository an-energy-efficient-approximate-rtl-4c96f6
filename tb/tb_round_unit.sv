// Test of the rounding circuit. For random scales across and beyond the
// posit<16,2> range and random kept products (hidden bit set, product in
// [2^11, 2^13)), the posit obtained by packing the output exactly must
// equal the reference rounding (nearest, ties to even, saturating) of the
// same value, and no fraction bit that does not fit the output may be set.
module tb_round_unit;
  import posit_ref_pkg::*;
  logic signed [7:0] scale_in;
  logic [12:0] prod;
  logic [6:0] scale_out;
  logic [10:0] frac_out;
  logic clk = 1'b0;
  int checks = 0, failures = 0;

  round_unit dut (.scale_in(scale_in), .prod(prod), .scale_out(scale_out), .frac_out(frac_out));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (500_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 300_000; n++) begin
      int s, so;
      longint pr;
      logic [15:0] expv, got;
      s  = int'($urandom % 241) - 120;
      pr = 2048 + longint'($urandom) % 6144;
      scale_in = 8'(s);
      prod = 13'(pr);
      @(posedge clk);
      #1;
      if (pr >= 4096) expv = ref_encode(0, s + 1, pr & 64'hFFF, 12, 0);
      else            expv = ref_encode(0, s, pr & 64'h7FF, 11, 0);
      so  = int'($signed(scale_out));
      got = ref_encode(0, so, longint'(frac_out), 11, 0, 0);
      checks++;
      if (got != expv || ref_encode(0, so, longint'(frac_out), 11, 0, 1) != got) begin
        failures++;
        if (failures < 10) $display("scale=%0d prod=%h -> %0d/%h packs %h expected %h", s, prod, so, frac_out, got, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
