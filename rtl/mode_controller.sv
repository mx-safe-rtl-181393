// mode_controller: sequences one 16x16 output tile on the core in either
// MX block mode and writes the result to the output SRAM.
//
// The paper names a Mode Controller and the two ways MX blocks reach a PU
// (Fig. 5(d) of the paper): in 1D mode every core row (and column) has a
// 1x64 block of its own, so each of the 16 rows uses its own shared
// exponent, constant for 16 K-steps; in tile mode an 8x8 tile covers 8
// rows and 8 K, so rows 0-7 share one exponent, rows 8-15 another, and the
// exponent changes every 2 K-steps. How the controller does this is this
// design's own: for K-step s of a 16-step group the exponent word (16
// entries) is read once per step and row r takes entry
//   1D:   r                       tile: 2*s[3:1] + r[3]
// and the same for weight columns.
//
// Sequence: start -> FEED (16*k_groups K-steps, one SRAM read of inputs,
// weights and both exponent words per cycle; the core sees them one cycle
// later with first/last on the first/last step) -> WAIT for core done ->
// WRITE (16 cycles, one accumulator row per output SRAM word at
// out_base + row) -> done pulse. Bases are word addresses; in_base and
// w_base must be 16-aligned. A tile takes 16*k_groups + 1 + (PR+PC-1) + 16
// cycles plus one for the done pulse.
module mode_controller
  import mxsf_pkg::*;
#(
  parameter int unsigned AW  = 13,
  parameter int unsigned OAW = 13,
  parameter int unsigned KW  = 10    // width of the K-group count
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // command
  input  logic                   start,
  input  mx_mode_e               mode,
  input  logic [KW-1:0]          k_groups,   // K = 64 * k_groups, >= 1
  input  logic [AW-1:0]          in_base,
  input  logic [AW-1:0]          w_base,
  input  logic [OAW-1:0]         out_base,
  output logic                   busy,
  output logic                   done,
  // operand SRAM read ports (shared address for input and weight timing)
  output logic                   op_re,
  output logic [AW-1:0]          in_raddr,
  output logic [AW-1:0]          w_raddr,
  output logic [AW-5:0]          in_eraddr,
  output logic [AW-5:0]          w_eraddr,
  input  sexp_t [CORE_ROWS-1:0]  in_eword,
  input  sexp_t [CORE_COLS-1:0]  w_eword,
  // to the core
  output logic                   core_valid,
  output logic                   core_first,
  output logic                   core_last,
  output sexp_t [CORE_ROWS-1:0]  core_sa,
  output sexp_t [CORE_COLS-1:0]  core_sw,
  input  logic                   core_done,
  // result write-back
  output logic                   out_we,
  output logic [OAW-1:0]         out_waddr,
  output logic [3:0]             out_row
);
  typedef enum logic [2:0] {S_IDLE, S_FEED, S_WAIT, S_WRITE, S_DONE} state_e;
  state_e          state;
  mx_mode_e        mode_q;
  logic [KW+3:0]   step, nsteps;
  logic [AW-1:0]   in_base_q, w_base_q;
  logic [OAW-1:0]  out_base_q;
  logic [3:0]      row;
  // read-data alignment
  logic            rd_v, rd_first, rd_last;
  logic [3:0]      rd_step;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      mode_q     <= MODE_1D;
      step       <= '0;
      nsteps     <= '0;
      in_base_q  <= '0;
      w_base_q   <= '0;
      out_base_q <= '0;
      row        <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state      <= S_FEED;
          mode_q     <= mode;
          step       <= '0;
          nsteps     <= {k_groups, 4'd0};
          in_base_q  <= in_base;
          w_base_q   <= w_base;
          out_base_q <= out_base;
        end
        S_FEED: begin
          step <= step + 1'b1;
          if (step == nsteps - 1'b1) state <= S_WAIT;
        end
        S_WAIT: if (core_done) begin
          state <= S_WRITE;
          row   <= '0;
        end
        S_WRITE: begin
          row <= row + 4'd1;
          if (row == 4'd15) state <= S_DONE;
        end
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy      = (state != S_IDLE);
  assign done      = (state == S_DONE);
  assign op_re     = (state == S_FEED);
  assign in_raddr  = in_base_q + AW'(step);
  assign w_raddr   = w_base_q + AW'(step);
  assign in_eraddr = in_raddr[AW-1:4];
  assign w_eraddr  = w_raddr[AW-1:4];
  assign out_we    = (state == S_WRITE);
  assign out_waddr = out_base_q + OAW'(row);
  assign out_row   = row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_v     <= 1'b0;
      rd_first <= 1'b0;
      rd_last  <= 1'b0;
      rd_step  <= '0;
    end else begin
      rd_v     <= (state == S_FEED);
      rd_first <= (state == S_FEED) && (step == '0);
      rd_last  <= (state == S_FEED) && (step == nsteps - 1'b1);
      rd_step  <= step[3:0];
    end
  end

  assign core_valid = rd_v;
  assign core_first = rd_first;
  assign core_last  = rd_last;

  always_comb begin
    for (int r = 0; r < int'(CORE_ROWS); r++)
      core_sa[r] = (mode_q == MODE_1D) ? in_eword[r]
                                       : in_eword[{rd_step[3:1], r[3]}];
    for (int c = 0; c < int'(CORE_COLS); c++)
      core_sw[c] = (mode_q == MODE_1D) ? w_eword[c]
                                       : w_eword[{rd_step[3:1], c[3]}];
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                 start && state == S_IDLE |-> k_groups != '0
                                 && in_base[3:0] == 4'd0 && w_base[3:0] == 4'd0);
endmodule
