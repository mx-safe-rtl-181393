// tb_mxsafe_top: end-to-end test of the accelerator at its full size (no
// parameter overrides: 0.5 MB SRAMs, 4x4 PUs of 4x4 SAFE-MACs).
//
// For each run it builds a random BF16 input matrix A (16 x K) and weight
// matrix W (16 x K, one row per output column) with values spread over
// ~14 binades, loads them through the MXSF converter, computes the 16x16
// tile A * W^T on the core and reads the FP32 results from the output
// SRAM. The expected result is computed here from the BF16 values alone:
// MXSF quantisation per block (1x64 blocks in 1D mode, 8x8 tiles in tile
// mode), then the SAFE-MAC rounding chain and FP32 accumulation.
// It checks every output, the compute latency (16*k_groups + 26 cycles
// from start to done), and counts the mechanisms exercised: 1D runs, tile
// runs, a switch between the modes, E2M5 and E3M2 (sub-FP) elements
// decoded in the core, and E3M2 subnormals; any that never happens counts
// as a failure.
module tb_mxsafe_top;
  import mxsf_pkg::*;
  import tb_ref_pkg::*;
  localparam int KG = 2;              // K groups per run
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
  int                    checks = 0, failures = 0, cyc = 0;
  int                    n_1d = 0, n_tile = 0, n_switch = 0, n_e2m5 = 0, n_subfp = 0, n_sub = 0;

  bf16_t A [16][K];
  bf16_t W [16][K];
  real   qa [16][K], qw [16][K];      // quantised values relative to their block
  int    sa [16][K], sw [16][K];      // shared exponent seen by each element
  real   want [16][16];

  mxsafe_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // sub-FP decode activity at one MAC lane of the core
  always @(posedge clk)
    if (dut.u_core.g_pr[0].g_pc[0].u_pu.valid_in) begin
      if (dut.u_core.g_pr[0].g_pc[0].u_pu.g_row[0].g_col[0].u_mac.g_lane[0].u_dec_a.is_subfp)
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

  task automatic load_block(input bf16_t blk [BLOCK], input mx_mode_e m, input mx_dst_e d,
                            input int word, input int slot);
    @(negedge clk);
    while (!ld_ready) @(negedge clk);
    foreach (blk[i]) ld_data[i] = blk[i];
    ld_valid = 1'b1; ld_mode = m; ld_dst = d; ld_word = 13'(word); ld_slot = 4'(slot);
    @(negedge clk);
    ld_valid = 1'b0;
  endtask

  // quantise one block given the flat list of (row, k) positions
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
      if (q != 0.0 && q < pow2(-9) && q > -pow2(-9)) n_sub++;
      if (is_w) begin qw[rows[i]][ks[i]] = q; sw[rows[i]][ks[i]] = s; end
      else      begin qa[rows[i]][ks[i]] = q; sa[rows[i]][ks[i]] = s; end
    end
  endfunction

  task automatic run(input mx_mode_e m, input int ib, input int wb, input int ob);
    int    rows [BLOCK], ks [BLOCK];
    bf16_t blk [BLOCK];
    int    t0, lat;
    // random operands
    foreach (A[r, k]) begin
      A[r][k] = {1'($urandom), 8'(125 - int'($urandom % 14)), 7'($urandom)};
      W[r][k] = {1'($urandom), 8'(131 - int'($urandom % 14)), 7'($urandom)};
      if ($urandom % 20 == 0) A[r][k] = 16'h0000;
    end
    // load and build the reference quantisation
    for (int is_w = 0; is_w < 2; is_w++) begin
      if (m == MODE_1D) begin
        for (int r = 0; r < 16; r++)
          for (int g = 0; g < KG; g++) begin
            for (int i = 0; i < BLOCK; i++) begin
              rows[i] = r; ks[i] = 64 * g + i;
              blk[i]  = is_w ? W[r][ks[i]] : A[r][ks[i]];
            end
            quant(is_w != 0, rows, ks);
            load_block(blk, m, mx_dst_e'(is_w), (is_w ? wb : ib) + 16 * g, r);
          end
      end else begin
        for (int gr = 0; gr < 2; gr++)
          for (int t = 0; t < K / 8; t++) begin
            for (int i = 0; i < BLOCK; i++) begin
              rows[i] = 8 * gr + i / 8; ks[i] = 8 * t + i % 8;
              blk[i]  = is_w ? W[rows[i]][ks[i]] : A[rows[i]][ks[i]];
            end
            quant(is_w != 0, rows, ks);
            load_block(blk, m, mx_dst_e'(is_w), (is_w ? wb : ib) + 16 * (t / 8),
                       2 * (t % 8) + gr);
          end
      end
    end
    // reference result
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
    // compute
    while (!ld_ready) @(negedge clk);
    @(negedge clk);
    start = 1'b1; mode = m; k_groups = 9'(KG);
    in_base = 13'(ib); w_base = 13'(wb); out_base = 13'(ob);
    t0 = cyc;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    lat = cyc - t0;
    checks++;
    if (lat != 16 * KG + 26) begin
      failures++;
      $display("latency %0d, want %0d", lat, 16 * KG + 26);
    end
    // read back
    for (int r = 0; r < 16; r++) begin
      @(negedge clk);
      out_re = 1'b1; out_raddr = 13'(ob + r);
      @(negedge clk);
      out_re = 1'b0;
      for (int c = 0; c < 16; c++) begin
        checks++;
        if (fp32_val(out_rdata[c]) != want[r][c]) begin
          failures++;
          if (failures < 10) $display("mode %0d (%0d,%0d): %g want %g", m, r, c,
                                      fp32_val(out_rdata[c]), want[r][c]);
        end
      end
    end
    if (m == MODE_1D) n_1d++; else n_tile++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(MODE_1D,   0,    256,  0);
    run(MODE_TILE, 1024, 2048, 100);
    n_switch++;
    run(MODE_1D,   8160 - 16 * KG + 16, 4096, 8176);   // ends at the top of the SRAMs
    $display("mechanisms: 1D runs %0d, tile runs %0d, mode switches %0d, E2M5 decodes %0d, E3M2 decodes %0d, subnormals %0d",
             n_1d, n_tile, n_switch, n_e2m5, n_subfp, n_sub);
    checks++;
    if (n_1d == 0 || n_tile == 0 || n_switch == 0 || n_e2m5 == 0 || n_subfp == 0 || n_sub == 0)
      failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
