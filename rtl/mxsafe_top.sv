// mxsafe_top: the MX-SAFE training/inference accelerator.
//
// Blocks (as in the paper's architecture overview): the MXSF converter
// quantises BF16 blocks arriving from off-chip memory into MXSF and stores
// them in the Input or Weight SRAM (0.5 MB each); the mode controller
// streams one K-step per cycle from both SRAMs into the MX-SAFE core
// (4x4 STA PUs of 4x4 SAFE-MACs, 16x16 outputs) in 1D or tile mode and
// writes the finished 16x16 FP32 tile into the Output SRAM (0.5 MB).
// Off-chip DRAM and the peripheral units (activation, softmax,
// normalisation) are outside this RTL: the converter's block input and
// the Output SRAM read port are the top's ports where they connect.
//
// Interface:
//   ld_*   : one BF16 block (64 values) per handshake, with its layout
//            (ld_mode, ld_word = 16-aligned K group base, ld_slot), to the
//            Input (ld_dst = 0) or Weight (1) SRAM.
//   start  : compute one output tile, K = 64*k_groups, operands at in_base
//            and w_base, result rows at out_base .. out_base+15. busy is
//            high until the done pulse.
//   out_*  : Output SRAM read port, data the cycle after out_re.
// Loading and computing may overlap only on different SRAM words.
module mxsafe_top
  import mxsf_pkg::*;
#(
  parameter int unsigned SRAM_DEPTH = 8192,   // 0.5 MB per operand SRAM
  parameter int unsigned OUT_DEPTH  = 8192,   // 0.5 MB output SRAM
  parameter int unsigned AW         = $clog2(SRAM_DEPTH),
  parameter int unsigned OAW        = $clog2(OUT_DEPTH),
  parameter int unsigned KW         = AW - 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // block load from off-chip memory
  input  logic                  ld_valid,
  output logic                  ld_ready,
  input  bf16_t [BLOCK-1:0]     ld_data,
  input  mx_mode_e              ld_mode,
  input  mx_dst_e               ld_dst,
  input  logic [AW-1:0]         ld_word,
  input  logic [3:0]            ld_slot,
  // compute command
  input  logic                  start,
  input  mx_mode_e              mode,
  input  logic [KW-1:0]         k_groups,
  input  logic [AW-1:0]         in_base,
  input  logic [AW-1:0]         w_base,
  input  logic [OAW-1:0]        out_base,
  output logic                  busy,
  output logic                  done,
  // result read-out (to peripheral units / off-chip)
  input  logic                  out_re,
  input  logic [OAW-1:0]        out_raddr,
  output fp32_t [CORE_COLS-1:0] out_rdata
);
  localparam int unsigned WB = CORE_ROWS * LANES;   // bytes per operand word

  // converter -> SRAM write
  logic                 wr_valid, ewr_valid;
  mx_dst_e              wr_dst;
  logic [AW-1:0]        wr_addr;
  mxsf_t [WB-1:0]       wr_data;
  logic  [WB-1:0]       wr_mask;
  logic [AW-5:0]        ewr_addr;
  sexp_t [CORE_ROWS-1:0] ewr_data;
  logic  [CORE_ROWS-1:0] ewr_mask;

  mxsf_converter #(.AW(AW)) u_conv (
    .clk, .rst_n,
    .in_valid (ld_valid), .in_ready (ld_ready), .in_data (ld_data),
    .in_mode (ld_mode), .in_dst (ld_dst), .in_word (ld_word), .in_slot (ld_slot),
    .wr_valid, .wr_dst, .wr_addr, .wr_data, .wr_mask,
    .ewr_valid, .ewr_addr, .ewr_data, .ewr_mask
  );

  // controller
  logic                  op_re;
  logic [AW-1:0]         in_raddr, w_raddr;
  logic [AW-5:0]         in_eraddr, w_eraddr;
  sexp_t [CORE_ROWS-1:0] in_eword;
  sexp_t [CORE_COLS-1:0] w_eword;
  logic                  core_valid, core_first, core_last, core_done;
  sexp_t [CORE_ROWS-1:0] core_sa;
  sexp_t [CORE_COLS-1:0] core_sw;
  logic                  out_we;
  logic [OAW-1:0]        out_waddr;
  logic [3:0]            out_row;

  mode_controller #(.AW(AW), .OAW(OAW), .KW(KW)) u_ctrl (
    .clk, .rst_n,
    .start, .mode, .k_groups, .in_base, .w_base, .out_base, .busy, .done,
    .op_re, .in_raddr, .w_raddr, .in_eraddr, .w_eraddr, .in_eword, .w_eword,
    .core_valid, .core_first, .core_last, .core_sa, .core_sw, .core_done,
    .out_we, .out_waddr, .out_row
  );

  // operand SRAMs
  mxsf_t [WB-1:0] in_rdata, w_rdata;

  operand_sram #(.DEPTH(SRAM_DEPTH)) u_input_sram (
    .clk,
    .we (wr_valid && wr_dst == DST_INPUT), .waddr (wr_addr), .wdata (wr_data), .wmask (wr_mask),
    .ewe (ewr_valid && wr_dst == DST_INPUT), .ewaddr (ewr_addr), .ewdata (ewr_data),
    .ewmask (ewr_mask),
    .re (op_re), .raddr (in_raddr), .rdata (in_rdata),
    .ere (op_re), .eraddr (in_eraddr), .erdata (in_eword)
  );

  operand_sram #(.DEPTH(SRAM_DEPTH)) u_weight_sram (
    .clk,
    .we (wr_valid && wr_dst == DST_WEIGHT), .waddr (wr_addr), .wdata (wr_data), .wmask (wr_mask),
    .ewe (ewr_valid && wr_dst == DST_WEIGHT), .ewaddr (ewr_addr), .ewdata (ewr_data),
    .ewmask (ewr_mask),
    .re (op_re), .raddr (w_raddr), .rdata (w_rdata),
    .ere (op_re), .eraddr (w_eraddr), .erdata (w_eword)
  );

  // core
  fp32_t [CORE_ROWS-1:0][CORE_COLS-1:0] acc;

  mxsafe_core #(.PR(PU_ROWS), .PC(PU_COLS)) u_core (
    .clk, .rst_n,
    .valid (core_valid), .first (core_first), .last (core_last),
    .a (in_rdata), .sa (core_sa), .w (w_rdata), .sw (core_sw),
    .acc, .done (core_done)
  );

  // output SRAM
  output_sram #(.DEPTH(OUT_DEPTH)) u_output_sram (
    .clk,
    .we (out_we), .waddr (out_waddr), .wdata (acc[out_row]),
    .re (out_re), .raddr (out_raddr), .rdata (out_rdata)
  );
endmodule
