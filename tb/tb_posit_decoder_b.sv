// Exhaustive test of Decoder B over all 65536 patterns in both modes.
// div = 0: same fields as a plain decode of |x|.
// div = 1: the scale rebuilt from the outputs and the fraction must be the
// table-corrected reciprocal of the reference model (scale -s-1, fraction
// 1 - f - EC clamped at 0; exact reciprocal when f = 0). The number of
// clamped subtractions is reported and must be non-zero.
module tb_posit_decoder_b;
  import posit_ref_pkg::*;
  logic [15:0] p;
  logic div;
  logic sign, ss, sadd_cin, chck;
  logic [3:0] regime;
  logic [1:0] expo;
  logic [10:0] frac;
  logic clk = 1'b0;
  int checks = 0, failures = 0, clamps = 0;

  posit_decoder_b #(.N(16), .ES(2), .LUT_AW(5)) dut (.in_p(p), .div(div), .sign(sign), .ss(ss), .regime(regime),
                                                   .expo(expo), .frac(frac), .sadd_cin(sadd_cin), .chck(chck));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < 2; m++) begin
      for (int v = 0; v < 65536; v++) begin
        dec_t d;
        int sc, esc, efr;
        bit cl;
        p = 16'(v);
        div = m[0];
        @(posedge clk);
        #1;
        d = ref_decode(p);
        if (div && !d.zero && !d.nar) begin
          ref_recip(p, 5, esc, efr, cl);
          if (cl) clamps++;
        end else begin
          esc = d.scale;
          efr = d.frac;
        end
        sc = 4 * int'($signed({ss, regime})) + int'({ss, expo}) + int'(sadd_cin);
        checks++;
        if (sign !== p[15] || chck !== (d.zero || d.nar) ||
            (!d.zero && !d.nar && (sc != esc || int'(frac) != efr))) begin
          failures++;
          if (failures < 10) $display("div=%0b p=%h scale %0d/%0d frac %h/%h", div, p, sc, esc, frac, efr);
        end
      end
    end
    checks++;
    if (clamps == 0) failures++;
    $display("clamped EC subtractions: %0d", clamps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
