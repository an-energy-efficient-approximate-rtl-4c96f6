// Exhaustive test of the exception detector over all 32 input combinations,
// against the exception table (rows written out here) and, for combinations
// the table does not list, posit arithmetic: NaR operand -> NaR, a/0 -> NaR,
// zero operand otherwise -> zero.
module tb_exception_detector;
  import posit_pkg::*;
  logic div, sign_a, chck_a, sign_b, chck_b;
  excep_e excep;
  logic clk = 1'b0;
  int checks = 0, failures = 0;

  exception_detector dut (.div(div), .sign_a(sign_a), .chck_a(chck_a), .sign_b(sign_b), .chck_b(chck_b), .excep(excep));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [1:0] expected(logic d, logic sa, logic ca, logic sb, logic cb);
    // rows of the table
    if (!ca && !cb)                             return 2'b00;
    if (!d && !sa && ca && !cb)                 return 2'b01;
    if (!d && !ca && !sb && cb)                 return 2'b01;
    if (!d && !ca && sb && cb)                  return 2'b11;
    if (d && !ca && sb && cb)                   return 2'b01;
    if (d && !sa && ca && !sb && cb)            return 2'b11;
    // not listed: posit arithmetic
    if (sa && ca)                               return 2'b11;  // NaR / anything
    if (!d && sb && cb)                         return 2'b11;  // 0 * NaR
    if (!d)                                     return 2'b01;  // 0 * b, 0 * 0
    if (sb && cb)                               return 2'b11;  // 0 / NaR
    if (cb)                                     return 2'b11;  // a / 0
    return 2'b01;                                              // 0 / b
  endfunction

  initial begin
    for (int v = 0; v < 32; v++) begin
      {div, sign_a, chck_a, sign_b, chck_b} = 5'(v);
      @(posedge clk);
      #1;
      checks++;
      if (excep != expected(div, sign_a, chck_a, sign_b, chck_b)) begin
        failures++;
        $display("in=%b excep=%b expected %b", 5'(v), excep, expected(div, sign_a, chck_a, sign_b, chck_b));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
