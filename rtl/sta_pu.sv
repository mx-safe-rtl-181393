// sta_pu: one processing unit (PU) of the systolic tensor array: a
// MAC_ROWS x MAC_COLS grid of SAFE-MACs computing a small sub-matrix
// product in parallel (paper: 4x4 MACs, 16 inputs and 16 weights per cycle).
//
// Inside the PU nothing is registered between MACs: input row r (LANES
// elements plus its shared exponent) is broadcast to every MAC of row r,
// weight column c to every MAC of column c. Only at the PU boundary are the
// operands registered on their way to the neighbouring PUs (inputs with
// valid/first/last to the right, weights down), which is how a systolic
// tensor array saves pipeline registers. Each MAC keeps its own output-
// stationary accumulator. `done` is the done of the last MAC (all MACs of a
// PU finish in the same cycle).
// Timing: inputs sampled at edge t; a_out/w_out valid after edge t; acc
// updated at edge t+1. The broadcast structure follows the paper; the
// flow directions and the valid/first/last sideband are this design's.
module sta_pu
  import mxsf_pkg::*;
#(
  parameter int unsigned NR = MAC_ROWS,
  parameter int unsigned NC = MAC_COLS
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       valid_in,
  input  logic                       first_in,
  input  logic                       last_in,
  input  mxsf_t [NR-1:0][LANES-1:0]  a_in,
  input  sexp_t [NR-1:0]             sa_in,
  input  mxsf_t [NC-1:0][LANES-1:0]  w_in,
  input  sexp_t [NC-1:0]             sw_in,
  output logic                       valid_out,
  output logic                       first_out,
  output logic                       last_out,
  output mxsf_t [NR-1:0][LANES-1:0]  a_out,
  output sexp_t [NR-1:0]             sa_out,
  output mxsf_t [NC-1:0][LANES-1:0]  w_out,
  output sexp_t [NC-1:0]             sw_out,
  output fp32_t [NR-1:0][NC-1:0]     acc,
  output logic                       done
);
  logic [NR-1:0][NC-1:0] mac_done;

  for (genvar r = 0; r < NR; r++) begin : g_row
    for (genvar c = 0; c < NC; c++) begin : g_col
      safe_mac u_mac (
        .clk   (clk),
        .rst_n (rst_n),
        .valid (valid_in),
        .first (first_in),
        .last  (last_in),
        .a     (a_in[r]),
        .w     (w_in[c]),
        .sa    (sa_in[r]),
        .sw    (sw_in[c]),
        .acc   (acc[r][c]),
        .done  (mac_done[r][c])
      );
    end
  end

  assign done = mac_done[NR-1][NC-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_out <= 1'b0;
      first_out <= 1'b0;
      last_out  <= 1'b0;
      a_out     <= '0;
      sa_out    <= '0;
      w_out     <= '0;
      sw_out    <= '0;
    end else begin
      valid_out <= valid_in;
      first_out <= first_in;
      last_out  <= last_in;
      a_out     <= a_in;
      sa_out    <= sa_in;
      w_out     <= w_in;
      sw_out    <= sw_in;
    end
  end
endmodule
