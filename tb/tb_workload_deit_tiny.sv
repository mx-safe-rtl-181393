// tb_workload_deit_tiny: a slice of the DeiT-Tiny training workload on the
// full-size accelerator. DeiT-Tiny has an embedding width of 192; this
// test computes 16 tokens x 16 output features of a 192-input linear layer
// in two ways:
//   forward   (1D mode, 1x64 blocks): activations ~ N(0,1), weights ~ N(0,0.02)
//   gradient  (tile mode, 8x8 tiles): activation gradients with a
//             log-uniform magnitude spread over 2^-30 .. 2^-14, as in
//             training, times the same activations.
// Every output must match the bit-level reference of the MXSF datapath;
// in addition the error of the whole MXSF pipeline against the exact BF16
// product is reported, and its normalised RMS must stay below 3%
// (forward) and 5% (gradient). The gradient run must decode E3M2
// elements. The layer sizes are DeiT-Tiny's well-known dimensions.
module tb_workload_deit_tiny;
  import mxsf_pkg::*;
  import tb_ref_pkg::*;
  localparam int KG = 3;              // K = 192
  localparam int K  = 64 * KG;
  logic                  clk = 1'b0, rst_n = 1'b0;
  logic                  ld_valid = 1'b0, ld_ready;
  bf16_t [BLOCK-1:0]     ld_data;
  mx_mode_e              ld_mode;
  mx_dst_e               ld_dst;
  logic [12:0]           ld_word;
  logic [3:0]            ld_slot;
  logic                  start = 1'b0;
  mx_mode_e              mode;
  logic [8:0]            k_groups;
  logic [12:0]           in_base, w_base, out_base;
  logic                  busy, done;
  logic                  out_re = 1'b0;
  logic [12:0]           out_raddr;
  fp32_t [CORE_COLS-1:0] out_rdata;
  int                    checks = 0, failures = 0;
  int                    n_subfp = 0, n_e2m5 = 0;

  bf16_t A [16][K];
  bf16_t W [16][K];
  real   qa [16][K], qw [16][K];
  int    sa [16][K], sw [16][K];
  real   want [16][16];

  mxsafe_top dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk)
    if (dut.u_core.g_pr[0].g_pc[0].u_pu.valid_in) begin
      if (dut.u_core.g_pr[0].g_pc[0].u_pu.g_row[0].g_col[0].u_mac.g_lane[0].u_dec_w.is_subfp)
        n_subfp++;
      else
        n_e2m5++;
    end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // BF16 from a real, truncating the mantissa
  function automatic bf16_t to_bf16(input real x);
    real ax, m;
    int  e;
    if (x == 0.0) return 16'h0000;
    ax = (x < 0.0) ? -x : x;
    e  = binade(ax);
    m  = ax / pow2(e) - 1.0;
    return {x < 0.0, 8'(e + 127), 7'($rtoi(m * 128.0))};
  endfunction

  function automatic real gauss();      // approx. N(0,1): sum of 12 uniforms
    real s;
    s = 0.0;
    for (int i = 0; i < 12; i++) s += real'($urandom % 65536) / 65536.0;
    return s - 6.0;
  endfunction

  task automatic load_block(input bf16_t blk [BLOCK], input mx_mode_e m, input mx_dst_e d,
                            input int word, input int slot);
    @(negedge clk);
    while (!ld_ready) @(negedge clk);
    foreach (blk[i]) ld_data[i] = blk[i];
    ld_valid = 1'b1; ld_mode = m; ld_dst = d; ld_word = 13'(word); ld_slot = 4'(slot);
    @(negedge clk);
    ld_valid = 1'b0;
  endtask

  function automatic void quant(input bit is_w, input int rows [BLOCK], input int ks [BLOCK]);
    int s;
    s = 0;
    for (int i = 0; i < BLOCK; i++) begin
      bf16_t x;
      x = is_w ? W[rows[i]][ks[i]] : A[rows[i]][ks[i]];
      if (int'(x[14:7]) > s) s = int'(x[14:7]);
    end
    for (int i = 0; i < BLOCK; i++) begin
      bf16_t x;
      real   q;
      x = is_w ? W[rows[i]][ks[i]] : A[rows[i]][ks[i]];
      q = mxsf_quant_ref(bf16_val(x), s);
      if (is_w) begin qw[rows[i]][ks[i]] = q; sw[rows[i]][ks[i]] = s; end
      else      begin qa[rows[i]][ks[i]] = q; sa[rows[i]][ks[i]] = s; end
    end
  endfunction

  task automatic run(input mx_mode_e m, input real limit, input string what);
    int    rows [BLOCK], ks [BLOCK];
    bf16_t blk [BLOCK];
    real   err2, ref2;
    for (int is_w = 0; is_w < 2; is_w++) begin
      if (m == MODE_1D) begin
        for (int r = 0; r < 16; r++)
          for (int g = 0; g < KG; g++) begin
            for (int i = 0; i < BLOCK; i++) begin
              rows[i] = r; ks[i] = 64 * g + i;
              blk[i]  = is_w ? W[r][ks[i]] : A[r][ks[i]];
            end
            quant(is_w != 0, rows, ks);
            load_block(blk, m, mx_dst_e'(is_w), 16 * g, r);
          end
      end else begin
        for (int gr = 0; gr < 2; gr++)
          for (int t = 0; t < K / 8; t++) begin
            for (int i = 0; i < BLOCK; i++) begin
              rows[i] = 8 * gr + i / 8; ks[i] = 8 * t + i % 8;
              blk[i]  = is_w ? W[rows[i]][ks[i]] : A[rows[i]][ks[i]];
            end
            quant(is_w != 0, rows, ks);
            load_block(blk, m, mx_dst_e'(is_w), 16 * (t / 8), 2 * (t % 8) + gr);
          end
      end
    end
    foreach (want[r, c]) begin
      want[r][c] = 0.0;
      for (int s = 0; s < K / 4; s++) begin
        real av[4], wv[4];
        for (int l = 0; l < 4; l++) begin
          av[l] = qa[r][4 * s + l];
          wv[l] = qw[c][4 * s + l];
        end
        want[r][c] = fp32_ref(want[r][c] + mac_step_real(av, wv, sa[r][4 * s], sw[c][4 * s]));
      end
    end
    while (!ld_ready) @(negedge clk);
    @(negedge clk);
    start = 1'b1; mode = m; k_groups = 9'(KG);
    in_base = '0; w_base = '0; out_base = '0;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    err2 = 0.0;
    ref2 = 0.0;
    for (int r = 0; r < 16; r++) begin
      @(negedge clk);
      out_re = 1'b1; out_raddr = 13'(r);
      @(negedge clk);
      out_re = 1'b0;
      for (int c = 0; c < 16; c++) begin
        real exact;
        exact = 0.0;
        for (int k = 0; k < K; k++) exact += bf16_val(A[r][k]) * bf16_val(W[c][k]);
        err2 += (fp32_val(out_rdata[c]) - exact) ** 2;
        ref2 += exact ** 2;
        checks++;
        if (fp32_val(out_rdata[c]) != want[r][c]) begin
          failures++;
          if (failures < 10) $display("%s (%0d,%0d): %g want %g", what, r, c,
                                      fp32_val(out_rdata[c]), want[r][c]);
        end
      end
    end
    $display("%s: normalised RMS error against exact BF16 GEMM = %f", what, $sqrt(err2 / ref2));
    checks++;
    if ($sqrt(err2 / ref2) > limit) failures++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // forward: Y = X * W^T
    foreach (A[r, k]) A[r][k] = to_bf16(gauss());
    foreach (W[c, k]) W[c][k] = to_bf16(0.02 * gauss());
    run(MODE_1D, 0.03, "forward (1D)");
    // gradient: dW-like product with small, widely spread gradient values
    foreach (W[c, k]) W[c][k] = to_bf16(gauss() * pow2(-14 - int'($urandom % 17)));
    n_subfp = 0;
    run(MODE_TILE, 0.05, "gradient (tile)");
    $display("gradient run: E3M2 decodes %0d, E2M5 decodes %0d (one MAC lane)", n_subfp, n_e2m5);
    checks++;
    if (n_subfp == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
