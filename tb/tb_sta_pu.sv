// tb_sta_pu: drives one STA PU (4x4 SAFE-MACs) with random MXSF rows and
// columns and checks the 16 accumulators against a real-number model, the
// one-cycle register delay of every operand passed to the neighbouring
// PUs, and that `done` rises the edge after the last K-step is sampled.
module tb_sta_pu;
  import mxsf_pkg::*;
  import tb_ref_pkg::*;
  localparam int R = MAC_ROWS, C = MAC_COLS;
  logic                      clk = 1'b0, rst_n = 1'b0;
  logic                      valid_in = 1'b0, first_in = 1'b0, last_in = 1'b0;
  mxsf_t [R-1:0][LANES-1:0]  a_in, a_out;
  sexp_t [R-1:0]             sa_in, sa_out;
  mxsf_t [C-1:0][LANES-1:0]  w_in, w_out;
  sexp_t [C-1:0]             sw_in, sw_out;
  logic                      valid_out, first_out, last_out;
  fp32_t [R-1:0][C-1:0]      acc;
  logic                      done;
  int                        checks = 0, failures = 0, cyc = 0;
  real                       model [R][C];

  sta_pu dut (.*);

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
    a_in = '0; w_in = '0; sa_in = '0; sw_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 20; run++) begin
      int len;
      len = 1 + int'($urandom % 20);
      foreach (model[r, c]) model[r][c] = 0.0;
      for (int k = 0; k < len; k++) begin
        mxsf_t [R-1:0][LANES-1:0] a_prev;
        mxsf_t [C-1:0][LANES-1:0] w_prev;
        @(negedge clk);
        valid_in = 1'b1;
        first_in = (k == 0);
        last_in  = (k == len - 1);
        foreach (a_in[r, l]) a_in[r][l] = mxsf_t'($urandom);
        foreach (w_in[c, l]) w_in[c][l] = mxsf_t'($urandom);
        foreach (sa_in[r]) sa_in[r] = 8'(118 + $urandom % 20);
        foreach (sw_in[c]) sw_in[c] = 8'(118 + $urandom % 20);
        foreach (model[r, c]) model[r][c] = fp32_ref(model[r][c] + step_ref(a_in[r], w_in[c], sa_in[r], sw_in[c]));
        if (last_in) t_last = cyc + 1;
        a_prev = a_in;
        w_prev = w_in;
        @(posedge clk);
        #1;
        checks++;
        if (a_out != a_prev || w_out != w_prev || valid_out != 1'b1 || sa_out != sa_in
            || sw_out != sw_in || first_out != (k == 0) || last_out != (k == len - 1))
          failures++;
      end
      @(negedge clk);
      valid_in = 1'b0; first_in = 1'b0; last_in = 1'b0;
      while (!done) @(negedge clk);
      checks++;
      if (cyc - t_last != 1) begin
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
