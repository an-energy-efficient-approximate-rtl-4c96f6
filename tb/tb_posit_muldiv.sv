// End-to-end test of the posit<16,2> multiply / approximate-divide unit at
// its default parameters.
//
// Drives directed corner operands (zero, NaR, +-1, minpos, maxpos, powers of
// two, negative operands with zero fraction) in both modes, then random
// operand pairs, and compares every result with the reference model:
//   div = 0: a * b rounded to nearest (ties to even) from the 13 product bits
//            the unit keeps;
//   div = 1: a * r(b), r(b) the table-corrected linear reciprocal;
//   exceptions per the exception table.
// Each mechanism of the datapath is counted and must occur at least once.
// It also reports how often the multiplication differs from the correctly
// rounded product (a consequence of the 13-bit truncated product) and the
// mean relative error of division (quotients well inside the posit range). The unit is combinational; a clock only
// paces the vectors and drives the watchdog.
module tb_posit_muldiv;
  import posit_ref_pkg::*;

  localparam int NRAND = 400000;

  logic [15:0] a, b, result;
  logic        div;
  logic        clk = 1'b0;
  int checks = 0, failures = 0;
  int cyc = 0;

  // mechanism counters
  int n_mul, n_div, n_exc_zero, n_exc_nar, n_div_nar, n_div_zero, n_neg_a, n_neg_b;
  int n_cin, n_norm, n_recip_exact, n_clamp, n_sat_max, n_sat_min, n_enc_carry, n_round_up;
  int n_mul_inexact;
  real sum_rel;
  int  n_rel;

  posit_muldiv dut (.a(a), .b(b), .div(div), .result(result));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(logic [15:0] ta, logic [15:0] tb_, logic tdiv);
    logic [15:0] exp_r, exact;
    int ex, sb, fb;
    bit cl;
    dec_t da, db;
    longint p;
    a = ta; b = tb_; div = tdiv;
    @(posedge clk);
    #1;
    da = ref_decode(ta);
    db = ref_decode(tb_);
    ex = ref_excep(tdiv, ta, tb_);
    if (tdiv) n_div++; else n_mul++;
    if (ex == 1) begin
      exp_r = 16'h0000;
      n_exc_zero++;
    end else if (ex == 3) begin
      exp_r = 16'h8000;
      n_exc_nar++;
    end else begin
      if (ta[15]) n_neg_a++;
      if (tb_[15]) n_neg_b++;
      if ((ta[15] && da.frac == 0) || (tb_[15] && db.frac == 0 && !tdiv)) n_cin++;
      if (tdiv) begin
        ref_recip(tb_, 5, sb, fb, cl);
        if (db.frac == 0) n_recip_exact++;
        if (cl) n_clamp++;
      end else begin
        sb = db.scale;
        fb = db.frac;
      end
      p = longint'(2048 + longint'(da.frac)) * longint'(2048 + longint'(fb));
      if (p >= (longint'(1) << 23)) n_norm++;
      if (da.scale + sb >= 56) n_sat_max++;
      if (da.scale + sb < -57) n_sat_min++;
      exp_r = ref_mul_unit(da.sgn ^ db.sgn, da.scale, da.frac, sb, fb);
      if ((da.sgn ^ db.sgn) && (ref_decode(exp_r).frac == 0) && ((ref_decode(exp_r).scale & 3) == 0)) n_enc_carry++;
      if (!tdiv) begin
        exact = ref_mul_exact(da.sgn ^ db.sgn, da.scale, da.frac, db.scale, db.frac);
        if (exact != exp_r) n_mul_inexact++;
      end else begin
        real q, r;
        q = ref_to_real(ta) / ref_to_real(tb_);
        r = ref_to_real(exp_r);
        if (da.scale - db.scale < 50 && db.scale - da.scale < 50) begin
          sum_rel += ((r - q) / q < 0.0) ? -(r - q) / q : (r - q) / q;
          n_rel++;
        end
      end
      // rounding went up: result magnitude above the truncated value
      if (exp_r != ref_mul_unit(da.sgn ^ db.sgn, da.scale, da.frac, sb, fb, 0)) n_round_up++;
    end
    checks++;
    if (result !== exp_r) begin
      failures++;
      if (failures <= 20)
        $display("MISMATCH div=%0b a=%h b=%h got=%h expected=%h", tdiv, ta, tb_, result, exp_r);
    end
  endtask

  function automatic void require(string name, int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("mechanism never exercised: %s", name);
    end else $display("  %-34s %0d", name, n);
  endfunction

  logic [15:0] corners [] = '{16'h0000, 16'h8000, 16'h4000, 16'hC000, 16'h0001, 16'hFFFF,
                              16'h7FFF, 16'h8001, 16'h4800, 16'h3800, 16'hB800, 16'h5000,
                              16'h2000, 16'hE000, 16'h6000, 16'hA000, 16'h4400, 16'hBC00,
                              16'h7FFE, 16'h0002, 16'h8002, 16'hFFFE, 16'h4001, 16'h47FF};

  initial begin
    sum_rel = 0.0;
    n_rel = 0;
    for (int m = 0; m < 2; m++)
      foreach (corners[i])
        foreach (corners[j])
          check_one(corners[i], corners[j], m[0]);
    for (int n = 0; n < NRAND; n++) begin
      logic [15:0] ra, rb;
      ra = 16'($urandom);
      rb = 16'($urandom);
      // bias some operands towards zero fractions and large magnitudes
      if (n % 7 == 0) rb = rb & 16'hFF00;
      if (n % 11 == 0) ra = {ra[15], 3'b111, ra[11:0]};
      check_one(ra, rb, 1'(n % 2));
    end
    $display("mechanisms:");
    require("multiply mode", n_mul);
    require("divide mode", n_div);
    require("zero result exception", n_exc_zero);
    require("NaR result exception", n_exc_nar);
    require("negative operand a", n_neg_a);
    require("negative operand b", n_neg_b);
    require("scale carry-in (neg, zero fraction)", n_cin);
    require("product normalisation (>= 2)", n_norm);
    require("exact reciprocal (f = 0)", n_recip_exact);
    require("EC subtraction clamped at 0", n_clamp);
    require("saturation to maxpos", n_sat_max);
    require("saturation to minpos", n_sat_min);
    require("encoder carry into regime", n_enc_carry);
    require("rounded up", n_round_up);
    $display("multiplications differing from correct rounding: %0d of %0d", n_mul_inexact, n_mul);
    $display("division mean relative error: %0.4f %%", 100.0 * sum_rel / real'(n_rel));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
