// tb_safe_mac: drives the SAFE-MAC with random MXSF vectors and shared
// exponents over several accumulation runs and compares the FP32
// accumulator with a real-number model of the datapath: four products
// rounded to FP12, tree (p0+p1)+(p2+p3) rounded to FP12 at each adder,
// scaled by 2^(sa+sw-254), accumulated with FP32 rounding. Also checks
// that `done` rises at the clock edge right after the one that samples
// the `last` input.
module tb_safe_mac;
  import mxsf_pkg::*;
  import tb_ref_pkg::*;
  logic              clk = 1'b0, rst_n = 1'b0;
  logic              valid = 1'b0, first = 1'b0, last = 1'b0;
  mxsf_t [LANES-1:0] a, w;
  sexp_t             sa, sw;
  fp32_t             acc;
  logic              done;
  int                checks = 0, failures = 0;
  int                cyc = 0;

  safe_mac dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real step_ref(input mxsf_t [LANES-1:0] av, input mxsf_t [LANES-1:0] wv,
                                   input sexp_t sav, input sexp_t swv);
    real p[4];
    for (int i = 0; i < 4; i++) p[i] = fp12_ref(mxsf_val(av[i]) * mxsf_val(wv[i]));
    return fp12_ref(fp12_ref(p[0] + p[1]) + fp12_ref(p[2] + p[3]))
           * pow2(int'(sav) + int'(swv) - 254);
  endfunction

  initial begin
    real model;
    int  t_last;
    a = '0; w = '0; sa = 8'd127; sw = 8'd127;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 200; run++) begin
      int len;
      len   = 1 + int'($urandom % 24);
      model = 0.0;
      for (int k = 0; k < len; k++) begin
        @(negedge clk);
        valid = 1'b1;
        first = (k == 0);
        last  = (k == len - 1);
        for (int i = 0; i < LANES; i++) begin
          a[i] = mxsf_t'($urandom);
          w[i] = mxsf_t'($urandom);
        end
        if (run % 5 == 0) w = '0;                       // zero weights
        sa = 8'(120 + $urandom % 16);
        sw = 8'(120 + $urandom % 16);
        model = fp32_ref(model + step_ref(a, w, sa, sw));
        if (last) t_last = cyc + 1;                     // edge that samples it
        if ($urandom % 4 == 0 && !last) begin           // bubble
          @(negedge clk);
          valid = 1'b0;
          first = 1'b0;
          last  = 1'b0;
        end
      end
      @(negedge clk);
      valid = 1'b0; first = 1'b0; last = 1'b0;
      while (!done) @(negedge clk);
      checks++;
      if (cyc - t_last != 1) begin
        failures++;
        $display("run %0d: done after %0d cycles", run, cyc - t_last);
      end
      checks++;
      if (fp32_val(acc) != model) begin
        failures++;
        if (failures < 10) $display("run %0d: acc %g want %g", run, fp32_val(acc), model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
