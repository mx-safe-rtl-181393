// tb_mode_controller: runs the controller in 1D and tile mode for several
// K lengths against a model of the two exponent SRAMs (entry e of exponent
// word a holds a unique value), and checks
//   - 16*k_groups reads at consecutive addresses from each base,
//   - core_valid on exactly those cycles, one cycle after the read, with
//     first/last on the first/last step,
//   - per-row / per-column shared exponent selection in each mode,
//   - 16 write-back cycles at out_base + row after core_done, then done,
//   - the total cycle count 16*k + 1 + wait + 16 + 1 from start to done.
module tb_mode_controller;
  import mxsf_pkg::*;
  localparam int AW = 13, OAW = 13, KW = 10;
  logic                  clk = 1'b0, rst_n = 1'b0;
  logic                  start = 1'b0;
  mx_mode_e              mode;
  logic [KW-1:0]         k_groups;
  logic [AW-1:0]         in_base, w_base;
  logic [OAW-1:0]        out_base;
  logic                  busy, done, op_re;
  logic [AW-1:0]         in_raddr, w_raddr;
  logic [AW-5:0]         in_eraddr, w_eraddr;
  sexp_t [CORE_ROWS-1:0] in_eword;
  sexp_t [CORE_COLS-1:0] w_eword;
  logic                  core_valid, core_first, core_last, core_done = 1'b0;
  sexp_t [CORE_ROWS-1:0] core_sa;
  sexp_t [CORE_COLS-1:0] core_sw;
  logic                  out_we;
  logic [OAW-1:0]        out_waddr;
  logic [3:0]            out_row;
  int                    checks = 0, failures = 0, cyc = 0;

  mode_controller dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // exponent SRAM models: registered read
  always @(posedge clk) if (op_re) begin
    foreach (in_eword[e]) in_eword[e] <= sexp_t'(in_eraddr * 7 + e);
    foreach (w_eword[e])  w_eword[e]  <= sexp_t'(w_eraddr * 5 + e + 100);
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_1d = 0, n_tile = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 6; run++) begin
      int k, nst, t0, reads, feeds, wait_c, rows;
      int ib, wb, ob, step_seen;
      k  = 1 + run % 3;
      nst = 16 * k;
      ib = 16 * int'($urandom % 256);
      wb = 16 * int'($urandom % 256);
      ob = int'($urandom % 4000);
      wait_c = 5 + run;
      @(negedge clk);
      start = 1'b1; mode = (run % 2) ? MODE_TILE : MODE_1D;
      k_groups = KW'(k); in_base = AW'(ib); w_base = AW'(wb); out_base = OAW'(ob);
      t0 = cyc;
      @(negedge clk);
      start = 1'b0;
      reads = 0; feeds = 0; step_seen = 0;
      // feed phase: reads and the core stream one cycle behind
      while (feeds < nst) begin
        if (op_re) begin
          checks++;
          if (int'(in_raddr) != ib + reads || int'(w_raddr) != wb + reads
              || int'(in_eraddr) != (ib + reads) / 16 || int'(w_eraddr) != (wb + reads) / 16)
            failures++;
          reads++;
        end
        if (core_valid) begin
          int s, ea, wa;
          s  = feeds % 16;
          ea = (ib + feeds) / 16;
          wa = (wb + feeds) / 16;
          checks++;
          if (core_first != (feeds == 0) || core_last != (feeds == nst - 1)) failures++;
          for (int r = 0; r < CORE_ROWS; r++) begin
            int idx;
            idx = (mode == MODE_1D) ? r : 2 * (s / 2) + r / 8;
            checks++;
            if (core_sa[r] != sexp_t'(ea * 7 + idx)) failures++;
            checks++;
            if (core_sw[r] != sexp_t'(wa * 5 + idx + 100)) failures++;
          end
          feeds++;
        end
        @(negedge clk);
      end
      checks++;
      if (reads != nst || core_valid || op_re) failures++;
      repeat (wait_c - 1) begin
        checks++;
        if (out_we || done) failures++;
        @(negedge clk);
      end
      core_done = 1'b1;
      @(negedge clk);
      core_done = 1'b0;
      rows = 0;
      while (out_we) begin
        checks++;
        if (int'(out_waddr) != ob + rows || int'(out_row) != rows) failures++;
        rows++;
        @(negedge clk);
      end
      checks++;
      if (rows != 16 || !done) failures++;
      checks++;
      // start..done: 1 (start) + nst feed + 1 + wait + 16 write + done
      if (cyc - t0 != nst + wait_c + 18) begin
        failures++;
        $display("run %0d: %0d cycles, want %0d", run, cyc - t0, nst + wait_c + 18);
      end
      if (mode == MODE_1D) n_1d++; else n_tile++;
      @(negedge clk);
      checks++;
      if (busy) failures++;
    end
    checks++;
    if (n_1d == 0 || n_tile == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
