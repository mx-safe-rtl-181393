// tb_output_sram: writes random FP32 rows to a full-size output SRAM and
// reads them back in a different order, checking data and the one-cycle
// read latency.
module tb_output_sram;
  import mxsf_pkg::*;
  localparam int DEPTH = 8192, NW = 16, AW = 13;
  logic            clk = 1'b0, we = 1'b0, re = 1'b0;
  logic [AW-1:0]   waddr, raddr;
  fp32_t [NW-1:0]  wdata, rdata;
  int              checks = 0, failures = 0;
  fp32_t [NW-1:0]  model [int];
  int              addrs[$];

  output_sram dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 64; i++) addrs.push_back(int'($urandom % DEPTH));
    addrs.push_back(DEPTH - 1);
    foreach (addrs[i]) begin
      @(negedge clk);
      we = 1'b1;
      waddr = AW'(addrs[i]);
      foreach (wdata[k]) wdata[k] = fp32_t'($urandom);
      model[addrs[i]] = wdata;
    end
    @(negedge clk);
    we = 1'b0;
    addrs.shuffle();
    foreach (addrs[i]) begin
      @(negedge clk);
      re = 1'b1;
      raddr = AW'(addrs[i]);
      @(negedge clk);
      re = 1'b0;
      checks++;
      if (rdata != model[addrs[i]]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
