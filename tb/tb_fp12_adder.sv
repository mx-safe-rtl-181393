// tb_fp12_adder: checks the FP12_E4M7 adder against the exact real sum
// rounded to FP12 (ties away, flush below 2^-11, saturate), on random
// operands, operands of equal magnitude and opposite sign, and zeros.
module tb_fp12_adder;
  import mxsf_pkg::*;
  import tb_ref_pkg::*;
  fp12_t a, b, y;
  int    checks = 0, failures = 0;

  fp12_adder dut (.a(a), .b(b), .y(y));

  task automatic check();
    real want;
    #1;
    want = fp12_ref(fp12_val(a) + fp12_val(b));
    checks++;
    if (fp12_val(y) != want) begin
      failures++;
      if (failures < 10) $display("%h + %h: got %g want %g", a, b, fp12_val(y), want);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 40000; i++) begin
      a = fp12_t'($urandom);
      b = fp12_t'($urandom);
      if (i % 4 == 1) b.e = a.e;                    // close exponents: cancellation
      if (i % 4 == 2) b = '{s: ~a.s, e: a.e, m: a.m};
      if (i % 64 == 3) a.e = 4'd0;
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
