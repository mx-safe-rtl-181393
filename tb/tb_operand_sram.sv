// tb_operand_sram: random masked writes to the data and exponent arrays of
// a full-size operand SRAM, checked against a sparse model on reads; checks
// the one-cycle read latency and that a read without re holds its data.
module tb_operand_sram;
  import mxsf_pkg::*;
  localparam int DEPTH = 8192, BYTES = 64, NEXP = 16, AW = 13, EAW = 9;
  logic              clk = 1'b0;
  logic              we = 1'b0, ewe = 1'b0, re = 1'b0, ere = 1'b0;
  logic [AW-1:0]     waddr, raddr;
  logic [EAW-1:0]    ewaddr, eraddr;
  mxsf_t [BYTES-1:0] wdata, rdata;
  logic  [BYTES-1:0] wmask;
  sexp_t [NEXP-1:0]  ewdata, erdata;
  logic  [NEXP-1:0]  ewmask;
  int                checks = 0, failures = 0;
  mxsf_t [BYTES-1:0] model  [int];
  sexp_t [NEXP-1:0]  emodel [int];
  int                addrs[$];

  operand_sram dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // a small set of addresses, each first fully written
    for (int i = 0; i < 32; i++) addrs.push_back(int'($urandom % DEPTH));
    addrs.push_back(0);
    addrs.push_back(DEPTH - 1);
    foreach (addrs[i]) begin
      @(negedge clk);
      we = 1'b1; ewe = 1'b1;
      waddr = AW'(addrs[i]); ewaddr = EAW'(addrs[i] / 16);
      foreach (wdata[b]) wdata[b] = mxsf_t'($urandom);
      foreach (ewdata[e]) ewdata[e] = sexp_t'($urandom);
      wmask = '1; ewmask = '1;
      model[addrs[i]] = wdata;
      emodel[addrs[i] / 16] = ewdata;
    end
    // masked overwrites
    for (int n = 0; n < 400; n++) begin
      int a;
      a = addrs[$urandom % addrs.size()];
      @(negedge clk);
      we = 1'b1; ewe = 1'b1;
      waddr = AW'(a); ewaddr = EAW'(a / 16);
      foreach (wdata[b]) wdata[b] = mxsf_t'($urandom);
      foreach (ewdata[e]) ewdata[e] = sexp_t'($urandom);
      wmask = {$urandom, $urandom}; ewmask = 16'($urandom);
      foreach (wdata[b]) if (wmask[b]) model[a][b] = wdata[b];
      foreach (ewdata[e]) if (ewmask[e]) emodel[a / 16][e] = ewdata[e];
    end
    @(negedge clk);
    we = 1'b0; ewe = 1'b0;
    foreach (addrs[i]) begin
      @(negedge clk);
      re = 1'b1; ere = 1'b1;
      raddr = AW'(addrs[i]); eraddr = EAW'(addrs[i] / 16);
      @(negedge clk);
      re = 1'b0; ere = 1'b0;
      raddr = '0; eraddr = '0;
      checks++;
      if (rdata != model[addrs[i]]) failures++;
      checks++;
      if (erdata != emodel[addrs[i] / 16]) failures++;
      @(negedge clk);                 // held without re
      checks++;
      if (rdata != model[addrs[i]]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
