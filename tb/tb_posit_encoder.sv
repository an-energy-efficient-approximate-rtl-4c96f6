// Test of the posit<16,2> encoder. For both signs, every scale from -56 to 56
// (exponent bits that do not fit cleared) and random fractions with the bits
// that do not fit cleared (as the rounding circuit delivers them), plus every all-zero fraction, the output must equal
// the reference encoding (2's complemented for a negative sign). The
// exception inputs must force 0x0000 (zero) and 0x8000 (NaR) for any sign.
module tb_posit_encoder;
  import posit_pkg::*;
  import posit_ref_pkg::*;
  logic sign;
  logic [6:0] scale;
  logic [10:0] frac;
  excep_e excep;
  logic [15:0] posit_out;
  logic clk = 1'b0;
  int checks = 0, failures = 0;

  posit_encoder dut (.sign(sign), .scale(scale), .frac(frac), .excep(excep), .posit_out(posit_out));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(bit sg, int s, int f, excep_e ex);
    logic [15:0] expv;
    sign = sg;
    scale = 7'(s);
    frac = 11'(f);
    excep = ex;
    @(posedge clk);
    #1;
    if (ex == EXC_ZERO)     expv = 16'h0000;
    else if (ex == EXC_NAR) expv = 16'h8000;
    else                    expv = ref_encode(sg, s, longint'(f), 11, 0, 0);
    checks++;
    if (posit_out != expv) begin
      failures++;
      if (failures < 10) $display("sign=%0b scale=%0d frac=%h excep=%0d out=%h expected %h", sg, s, f, ex, posit_out, expv);
    end
  endtask

  initial begin
    for (int sg = 0; sg < 2; sg++) begin
      for (int si = -56; si <= 56; si++) begin
        int k, r, keepf, s;
        s = si;
        k = (s >= 0) ? s / 4 : -((-s + 3) / 4);
        r = (k >= 0) ? k + 2 : 1 - k;
        if (r > 15) r = 15;
        keepf = 15 - r - 2;                // fraction bits that fit
        if (keepf < 0) s = 4 * k + ((s - 4 * k) & ~((1 << -keepf) - 1));
        one(sg[0], s, 0, EXC_NONE);
        for (int n = 0; n < 200; n++) begin
          int f;
          f = $urandom % 2048;
          if (keepf <= 0) f = 0;
          else f = f & ~((1 << (11 - keepf)) - 1);
          if (s == 56) f = 0;              // maxpos carries no fraction
          one(sg[0], s, f, EXC_NONE);
        end
        one(sg[0], s, $urandom % 2048, EXC_ZERO);
        one(sg[0], s, $urandom % 2048, EXC_NAR);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
