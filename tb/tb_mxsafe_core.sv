// tb_mxsafe_core: runs several output tiles through the full 4x4-PU core
// with random MXSF operands and per-row / per-column shared exponents that
// change every K-step, and compares all 256 FP32 accumulators with a real-
// number model of the SAFE-MAC datapath. Checks that `done` rises
// PR + PC - 1 edges after the edge that samples the last K-step.
module tb_mxsafe_core;
  import mxsf_pkg::*;
  import tb_ref_pkg::*;
  localparam int R = CORE_ROWS, C = CORE_COLS;
  logic                      clk = 1'b0, rst_n = 1'b0;
  logic                      valid = 1'b0, first = 1'b0, last = 1'b0;
  mxsf_t [R-1:0][LANES-1:0]  a;
  sexp_t [R-1:0]             sa;
  mxsf_t [C-1:0][LANES-1:0]  w;
  sexp_t [C-1:0]             sw;
  fp32_t [R-1:0][C-1:0]      acc;
  logic                      done;
  int                        checks = 0, failures = 0, cyc = 0;
  real                       model [R][C];

  mxsafe_core dut (.*);

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
    int t_last;
    a = '0; w = '0; sa = '0; sw = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 4; run++) begin
      int len;
      len = 8 + 8 * run;
      foreach (model[r, c]) model[r][c] = 0.0;
      for (int k = 0; k < len; k++) begin
        @(negedge clk);
        valid = 1'b1;
        first = (k == 0);
        last  = (k == len - 1);
        foreach (a[r, l]) a[r][l] = mxsf_t'($urandom);
        foreach (w[c, l]) w[c][l] = mxsf_t'($urandom);
        foreach (sa[r]) sa[r] = 8'(118 + $urandom % 20);
        foreach (sw[c]) sw[c] = 8'(118 + $urandom % 20);
        foreach (model[r, c]) model[r][c] = fp32_ref(model[r][c] + step_ref(a[r], w[c], sa[r], sw[c]));
        if (last) t_last = cyc + 1;
      end
      @(negedge clk);
      valid = 1'b0; first = 1'b0; last = 1'b0;
      while (!done) @(negedge clk);
      checks++;
      if (cyc - t_last != PU_ROWS + PU_COLS - 1) begin
        failures++;
        $display("run %0d: done after %0d cycles", run, cyc - t_last);
      end
      foreach (model[r, c]) begin
        checks++;
        if (fp32_val(acc[r][c]) != model[r][c]) begin
          failures++;
          if (failures < 10) $display("run %0d (%0d,%0d): %g want %g", run, r, c,
                                      fp32_val(acc[r][c]), model[r][c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
