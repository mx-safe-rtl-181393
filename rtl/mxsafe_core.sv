// mxsafe_core: the MX-SAFE core, a PR x PC grid of STA PUs (paper: 4x4 PUs
// of 4x4 SAFE-MACs, so a 16x16 output tile) running output-stationary
// systolic matrix multiplication.
//
// Every cycle the core takes, for each of the 16 output rows, LANES MXSF
// input elements and that row's shared exponent, and for each of the 16
// output columns LANES weight elements and their shared exponent: one
// K-step of LANES products per output. Inputs move one PU to the right per
// cycle and weights one PU down, so the edge skews them: PU row i sees its
// inputs i cycles late, PU column j its weights j cycles late, and both
// meet in PU (i,j) i+j cycles after entry. valid/first/last ride with the
// inputs. After the K-step flagged `last` is sampled at edge t, `done`
// rises at edge t + PR + PC - 1 with every accumulator final.
// The PU grid follows the paper; skew, directions and control are this
// design's choices.
module mxsafe_core
  import mxsf_pkg::*;
#(
  parameter int unsigned PR = PU_ROWS,
  parameter int unsigned PC = PU_COLS
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 valid,
  input  logic                                 first,
  input  logic                                 last,
  input  mxsf_t [PR*MAC_ROWS-1:0][LANES-1:0]   a,
  input  sexp_t [PR*MAC_ROWS-1:0]              sa,
  input  mxsf_t [PC*MAC_COLS-1:0][LANES-1:0]   w,
  input  sexp_t [PC*MAC_COLS-1:0]              sw,
  output fp32_t [PR*MAC_ROWS-1:0][PC*MAC_COLS-1:0] acc,
  output logic                                 done
);
  typedef mxsf_t [MAC_ROWS-1:0][LANES-1:0] a_grp_t;
  typedef sexp_t [MAC_ROWS-1:0]            sa_grp_t;
  typedef mxsf_t [MAC_COLS-1:0][LANES-1:0] w_grp_t;
  typedef sexp_t [MAC_COLS-1:0]            sw_grp_t;
  typedef fp32_t [MAC_ROWS-1:0][MAC_COLS-1:0] acc_grp_t;

  // horizontal links: column index PC is the (unused) right-edge output
  a_grp_t  [PR-1:0][PC:0] ah;
  sa_grp_t [PR-1:0][PC:0] sah;
  logic    [PR-1:0][PC:0] vh, fh, lh;
  // vertical links: row index PR is the (unused) bottom-edge output
  w_grp_t  [PR:0][PC-1:0] wv;
  sw_grp_t [PR:0][PC-1:0] swv;
  acc_grp_t [PR-1:0][PC-1:0] acc_pu;
  logic    [PR-1:0][PC-1:0] done_pu;

  // input-edge skew: PU row i delayed by i cycles
  for (genvar i = 0; i < PR; i++) begin : g_askew
    a_grp_t  a_d  [i+1];
    sa_grp_t sa_d [i+1];
    logic    v_d  [i+1];
    logic    f_d  [i+1];
    logic    l_d  [i+1];
    assign a_d[0]  = a[i*MAC_ROWS +: MAC_ROWS];
    assign sa_d[0] = sa[i*MAC_ROWS +: MAC_ROWS];
    assign v_d[0]  = valid;
    assign f_d[0]  = first;
    assign l_d[0]  = last;
    for (genvar k = 1; k <= i; k++) begin : g_stage
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          a_d[k]  <= '0;
          sa_d[k] <= '0;
          v_d[k]  <= 1'b0;
          f_d[k]  <= 1'b0;
          l_d[k]  <= 1'b0;
        end else begin
          a_d[k]  <= a_d[k-1];
          sa_d[k] <= sa_d[k-1];
          v_d[k]  <= v_d[k-1];
          f_d[k]  <= f_d[k-1];
          l_d[k]  <= l_d[k-1];
        end
      end
    end
    assign ah[i][0]  = a_d[i];
    assign sah[i][0] = sa_d[i];
    assign vh[i][0]  = v_d[i];
    assign fh[i][0]  = f_d[i];
    assign lh[i][0]  = l_d[i];
  end

  // weight-edge skew: PU column j delayed by j cycles
  for (genvar j = 0; j < PC; j++) begin : g_wskew
    w_grp_t  w_d  [j+1];
    sw_grp_t sw_d [j+1];
    assign w_d[0]  = w[j*MAC_COLS +: MAC_COLS];
    assign sw_d[0] = sw[j*MAC_COLS +: MAC_COLS];
    for (genvar k = 1; k <= j; k++) begin : g_stage
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          w_d[k]  <= '0;
          sw_d[k] <= '0;
        end else begin
          w_d[k]  <= w_d[k-1];
          sw_d[k] <= sw_d[k-1];
        end
      end
    end
    assign wv[0][j]  = w_d[j];
    assign swv[0][j] = sw_d[j];
  end

  for (genvar i = 0; i < PR; i++) begin : g_pr
    for (genvar j = 0; j < PC; j++) begin : g_pc
      sta_pu #(.NR(MAC_ROWS), .NC(MAC_COLS)) u_pu (
        .clk       (clk),
        .rst_n     (rst_n),
        .valid_in  (vh[i][j]),
        .first_in  (fh[i][j]),
        .last_in   (lh[i][j]),
        .a_in      (ah[i][j]),
        .sa_in     (sah[i][j]),
        .w_in      (wv[i][j]),
        .sw_in     (swv[i][j]),
        .valid_out (vh[i][j+1]),
        .first_out (fh[i][j+1]),
        .last_out  (lh[i][j+1]),
        .a_out     (ah[i][j+1]),
        .sa_out    (sah[i][j+1]),
        .w_out     (wv[i+1][j]),
        .sw_out    (swv[i+1][j]),
        .acc       (acc_pu[i][j]),
        .done      (done_pu[i][j])
      );
      for (genvar r = 0; r < MAC_ROWS; r++) begin : g_r
        assign acc[i*MAC_ROWS + r][j*MAC_COLS +: MAC_COLS] = acc_pu[i][j][r];
      end
    end
  end

  assign done = done_pu[PR-1][PC-1];
endmodule
