// operand_sram: on-chip operand buffer for MXSF data; the accelerator has
// two, the Input SRAM and the Weight SRAM (paper: 0.5 MB each).
//
// Data array: DEPTH words of BYTES MXSF elements. A word is one K-step of
// the core: for each of the 16 core rows (or columns) LANES = 4 consecutive
// K elements, row r in bytes 4r..4r+3. Exponent array: one word of NEXP
// shared exponents per 16 data words (one 1x64 block per row in 1D mode,
// or 2 x 8 tiles in tile mode, see mode_controller). 8192 x 64 B = 0.5 MB
// of elements follows the paper; the word organisation and the separate
// 8 KB exponent array are this design's choices.
// One write port with byte / exponent masks, one read port; reads are
// registered (data valid the cycle after re). Written as plain arrays.
module operand_sram
  import mxsf_pkg::*;
#(
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned BYTES = CORE_ROWS * LANES,   // 64
  parameter int unsigned NEXP  = CORE_ROWS,           // 16
  parameter int unsigned AW    = $clog2(DEPTH),
  parameter int unsigned EAW   = AW - 4
) (
  input  logic                    clk,
  // write port
  input  logic                    we,
  input  logic [AW-1:0]           waddr,
  input  mxsf_t [BYTES-1:0]       wdata,
  input  logic  [BYTES-1:0]       wmask,
  input  logic                    ewe,
  input  logic [EAW-1:0]          ewaddr,
  input  sexp_t [NEXP-1:0]        ewdata,
  input  logic  [NEXP-1:0]        ewmask,
  // read port
  input  logic                    re,
  input  logic [AW-1:0]           raddr,
  output mxsf_t [BYTES-1:0]       rdata,
  input  logic                    ere,
  input  logic [EAW-1:0]          eraddr,
  output sexp_t [NEXP-1:0]        erdata
);
  mxsf_t [BYTES-1:0] mem  [DEPTH];
  sexp_t [NEXP-1:0]  emem [DEPTH/16];

  always_ff @(posedge clk) begin
    if (we)
      for (int b = 0; b < int'(BYTES); b++)
        if (wmask[b]) mem[waddr][b] <= wdata[b];
    if (ewe)
      for (int e = 0; e < int'(NEXP); e++)
        if (ewmask[e]) emem[ewaddr][e] <= ewdata[e];
    if (re)  rdata  <= mem[raddr];
    if (ere) erdata <= emem[eraddr];
  end
endmodule
