// output_sram: on-chip buffer for results (paper: Output SRAM, 0.5 MB).
// Each word holds one row of a 16x16 output tile as 16 FP32 values, so an
// output tile is 16 consecutive words; 8192 x 64 B = 0.5 MB. The word
// organisation and FP32 results are this design's choices.
// One write port, one registered read port (data valid the cycle after re).
module output_sram
  import mxsf_pkg::*;
#(
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned NW    = CORE_COLS,   // FP32 values per word
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               we,
  input  logic [AW-1:0]      waddr,
  input  fp32_t [NW-1:0]     wdata,
  input  logic               re,
  input  logic [AW-1:0]      raddr,
  output fp32_t [NW-1:0]     rdata
);
  fp32_t [NW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
