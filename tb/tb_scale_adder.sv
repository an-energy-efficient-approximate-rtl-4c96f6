// Test of the scale adder. Random pairs of scales 4k+e in the posit<16,2>
// range (and all carry-in combinations) are turned into the decoders'
// field encoding - k >= 0: ss=0, regime=k; k < 0: ss=1, regime=(k-1) mod 16;
// exponent = e in both cases - and the output must equal sA + sB + cinA + cinB.
module tb_scale_adder;
  logic ss_a, ss_b, cin_a, cin_b;
  logic [3:0] reg_a, reg_b;
  logic [1:0] exp_a, exp_b;
  logic signed [7:0] scale;
  logic clk = 1'b0;
  int checks = 0, failures = 0;

  scale_adder #(.RW(4), .ES(2), .SW(8)) dut (.ss_a(ss_a), .reg_a(reg_a), .exp_a(exp_a), .cin_a(cin_a),
                                            .ss_b(ss_b), .reg_b(reg_b), .exp_b(exp_b), .cin_b(cin_b), .scale(scale));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fields(int s, output logic ss, output logic [3:0] r, output logic [1:0] e);
    int k;
    k = (s >= 0) ? s / 4 : -((-s + 3) / 4);
    e = 2'(s - 4 * k);
    ss = (k < 0);
    r = (k >= 0) ? 4'(k) : 4'(k - 1);
  endtask

  initial begin
    for (int sa = -56; sa <= 56; sa++) begin
      for (int sb = -56; sb <= 56; sb += 3) begin
        int c;
        c = $urandom % 4;
        fields(sa, ss_a, reg_a, exp_a);
        fields(sb, ss_b, reg_b, exp_b);
        cin_a = c[0];
        cin_b = c[1];
        @(posedge clk);
        #1;
        checks++;
        if (int'(scale) != sa + sb + c[0] + c[1]) begin
          failures++;
          if (failures < 10) $display("sa=%0d sb=%0d c=%0d scale=%0d", sa, sb, c, scale);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
