// tb_safe_mul: checks the E4M5 x E4M5 multiplier against real arithmetic
// rounded to FP12_E4M7 (ties away, flush below 2^-11). Covers every pair
// of decodable MXSF elements' exponents with random mantissas and signs,
// plus random raw E4M5 operands.
module tb_safe_mul;
  import mxsf_pkg::*;
  import tb_ref_pkg::*;
  e4m5_t a, b;
  fp12_t p;
  int    checks = 0, failures = 0;

  safe_mul dut (.a(a), .b(b), .p(p));

  task automatic check();
    real want;
    #1;
    want = fp12_ref(e4m5_val(a) * e4m5_val(b));
    checks++;
    if (fp12_val(p) != want) begin
      failures++;
      if (failures < 10) $display("%h x %h: got %g want %g", a, b, fp12_val(p), want);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int ea = 0; ea < 16; ea++)
      for (int eb = 0; eb < 16; eb++)
        for (int k = 0; k < 20; k++) begin
          a = '{s: 1'($urandom), e: 4'(ea), m: 5'($urandom)};
          b = '{s: 1'($urandom), e: 4'(eb), m: 5'($urandom)};
          check();
        end
    // all-ones mantissas: largest products and rounding carry
    a = '{s: 1'b0, e: 4'd15, m: 5'h1f};
    b = '{s: 1'b1, e: 4'd15, m: 5'h1f};
    check();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
