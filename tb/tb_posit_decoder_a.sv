// Exhaustive test of Decoder A over all 65536 posit<16,2> patterns.
// For every real-valued input the scale rebuilt from the outputs,
// 4*signed{ss,regime} + unsigned{ss,expo} + sadd_cin, must equal 4k+e of |x|
// and the fraction must equal |x|'s fraction; sign and chck are checked for
// all inputs, including zero and NaR.
module tb_posit_decoder_a;
  import posit_ref_pkg::*;
  logic [15:0] p;
  logic sign, ss, sadd_cin, chck;
  logic [3:0] regime;
  logic [1:0] expo;
  logic [10:0] frac;
  logic clk = 1'b0;
  int checks = 0, failures = 0;

  posit_decoder_a #(.N(16), .ES(2)) dut (.in_p(p), .sign(sign), .ss(ss), .regime(regime), .expo(expo),
                                        .frac(frac), .sadd_cin(sadd_cin), .chck(chck));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 65536; v++) begin
      dec_t d;
      int sc;
      p = 16'(v);
      @(posedge clk);
      #1;
      d = ref_decode(p);
      sc = 4 * int'($signed({ss, regime})) + int'({ss, expo}) + int'(sadd_cin);
      checks++;
      if (sign !== p[15] || chck !== (d.zero || d.nar) ||
          (!d.zero && !d.nar && (sc != d.scale || int'(frac) != d.frac))) begin
        failures++;
        if (failures < 10) $display("p=%h scale %0d/%0d frac %h/%h", p, sc, d.scale, frac, d.frac);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
