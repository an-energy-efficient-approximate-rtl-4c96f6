// Reciprocal accuracy sweep: every one of the 2048 fraction values of a
// posit<16,2> divisor b = 1.f (scale 0) is divided into a = 1.0, for error
// tables of 2^5, 2^6, 2^7 and 2^8 entries and for the unit built without a
// table (uncorrected reciprocal). With a = 1 the result is exactly
// the unit's reciprocal of b (11 fraction bits, nothing is rounded), so it is
// compared bit for bit with the reference reciprocal and its error against
// the true 1/b is accumulated:
//   MED  = mean |r - 1/b|, MRED = mean |r - 1/b| / (1/b), NMED = MED / max(1/b).
// Negative divisors are swept as well and must give the negated result.
// Checks: every result matches the reference, MRED falls as the table grows,
// and each MRED lies within 5 % of the published figures for the same
// configurations (8.3333 % without a table; 0.3834, 0.1800, 0.0902 and
// 0.0434 % with 2^5..2^8 entries).
module tb_recip_accuracy;
  import posit_ref_pkg::*;
  logic [15:0] b;
  logic [15:0] r0, r5, r6, r7, r8;
  logic clk = 1'b0;
  int checks = 0, failures = 0;
  real med [5], mred [5];
  const int  aws [5] = '{0, 5, 6, 7, 8};
  const real pub_mred [5] = '{8.3333, 0.3834, 0.1800, 0.0902, 0.0434};

  posit_muldiv #(.LUT_AW_P(0)) u0 (.a(16'h4000), .b(b), .div(1'b1), .result(r0));
  posit_muldiv #(.LUT_AW_P(5)) u5 (.a(16'h4000), .b(b), .div(1'b1), .result(r5));
  posit_muldiv #(.LUT_AW_P(6)) u6 (.a(16'h4000), .b(b), .div(1'b1), .result(r6));
  posit_muldiv #(.LUT_AW_P(7)) u7 (.a(16'h4000), .b(b), .div(1'b1), .result(r7));
  posit_muldiv #(.LUT_AW_P(8)) u8 (.a(16'h4000), .b(b), .div(1'b1), .result(r8));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic score(int idx, int aw, logic [15:0] got, logic [15:0] bb);
    int sc, fr;
    bit cl;
    logic [15:0] expv;
    real t, v;
    ref_recip(bb, aw, sc, fr, cl);
    expv = ref_encode(bb[15], sc, longint'(fr), 11, 0);
    checks++;
    if (got != expv) begin
      failures++;
      if (failures < 10) $display("AW=%0d b=%h got %h expected %h", aw, bb, got, expv);
    end
    if (!bb[15]) begin
      t = 1.0 / ref_to_real(bb);
      v = ref_to_real(got);
      med[idx]  += (v > t) ? v - t : t - v;
      mred[idx] += ((v > t) ? v - t : t - v) / t;
    end
  endtask

  initial begin
    for (int i = 0; i < 5; i++) begin
      med[i] = 0.0;
      mred[i] = 0.0;
    end
    for (int sg = 0; sg < 2; sg++) begin
      for (int f = 0; f < 2048; f++) begin
        logic [15:0] bp;
        bp = 16'h4000 | 16'(f);
        b = (sg != 0) ? -bp : bp;
        @(posedge clk);
        #1;
        score(0, 0, r0, b);
        score(1, 5, r5, b);
        score(2, 6, r6, b);
        score(3, 7, r7, b);
        score(4, 8, r8, b);
      end
    end
    $display("table     MED (%%)   MRED (%%)  NMED (1e-3)");
    for (int i = 0; i < 5; i++)
      $display("%s  %8.4f  %8.4f  %8.4f", (i == 0) ? "none    " : $sformatf("2^%0d x 9 ", aws[i]),
               100.0 * med[i] / 2048.0, 100.0 * mred[i] / 2048.0, 1000.0 * med[i] / 2048.0 / 1.0);
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (!(mred[i + 1] < mred[i])) failures++;
    end
    for (int i = 0; i < 5; i++) begin
      real m;
      m = 100.0 * mred[i] / 2048.0;
      checks++;
      if (m < 0.95 * pub_mred[i] || m > 1.05 * pub_mred[i]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
