// tb_mxsf_converter: feeds random BF16 blocks (values spread over ~14
// binades around a random top exponent, with zeros and exact rounding
// ties mixed in) in both layouts, captures every SRAM write into a model
// memory, and checks
//   - the shared exponent equals the largest BF16 exponent of the block,
//   - every stored element decodes to the reference MXSF quantisation,
//   - E2M5, E3M2 and E3M2-subnormal codes all occur,
//   - a block takes 16 write beats in 1D mode and 2 in tile mode, with
//     in_ready low meanwhile, and only the block's own bytes are written.
module tb_mxsf_converter;
  import mxsf_pkg::*;
  import tb_ref_pkg::*;
  localparam int AW = 13;
  logic                        clk = 1'b0, rst_n = 1'b0;
  logic                        in_valid = 1'b0, in_ready;
  bf16_t [BLOCK-1:0]           in_data;
  mx_mode_e                    in_mode;
  mx_dst_e                     in_dst;
  logic [AW-1:0]               in_word;
  logic [3:0]                  in_slot;
  logic                        wr_valid, ewr_valid;
  mx_dst_e                     wr_dst;
  logic [AW-1:0]               wr_addr;
  mxsf_t [CORE_ROWS*LANES-1:0] wr_data;
  logic  [CORE_ROWS*LANES-1:0] wr_mask;
  logic [AW-5:0]               ewr_addr;
  sexp_t [CORE_ROWS-1:0]       ewr_data;
  logic  [CORE_ROWS-1:0]       ewr_mask;
  int                          checks = 0, failures = 0;
  int                          n_e2m5 = 0, n_e3m2 = 0, n_sub = 0;
  mxsf_t                       mem  [int][CORE_ROWS*LANES];
  sexp_t                       emem [int][CORE_ROWS];
  int                          beats, bytes_written;

  mxsf_converter dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (wr_valid) begin
      beats++;
      foreach (wr_mask[b]) if (wr_mask[b]) begin
        mem[int'(wr_addr)][b] = wr_data[b];
        bytes_written++;
      end
    end
    if (ewr_valid)
      foreach (ewr_mask[e]) if (ewr_mask[e]) emem[int'(ewr_addr)][e] = ewr_data[e];
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // worked example: six BF16 values (sign | exponent | mantissa) and the
    // MXSF codes they must become, shared exponent 129
    begin
      bf16_t ex_in  [6] = '{16'hC0DA, 16'h3C25, 16'h406E, 16'h3F1F, 16'h0000, 16'h3BB7};
      mxsf_t ex_out [6] = '{8'hF7, 8'h05, 8'h5C, 8'h1D, 8'h00, 8'h03};
      in_data = '0;
      foreach (ex_in[i]) in_data[i] = ex_in[i];
      @(negedge clk);
      in_valid = 1'b1; in_mode = MODE_1D; in_dst = DST_INPUT; in_word = '0; in_slot = '0;
      @(negedge clk);
      in_valid = 1'b0;
      while (!in_ready) @(negedge clk);
      checks++;
      if (emem[0][0] != 8'd129) failures++;
      foreach (ex_out[i]) begin
        checks++;
        if (mem[i / 4][i % 4] != ex_out[i]) begin
          failures++;
          $display("example %0d: code %h want %h", i, mem[i / 4][i % 4], ex_out[i]);
        end
      end
    end
    for (int blk = 0; blk < 120; blk++) begin
      int top, s_ref, word, slot;
      top = 100 + int'($urandom % 40);
      foreach (in_data[i]) begin
        int e;
        e = top - int'($urandom % 15);
        in_data[i] = {1'($urandom), 8'(e), 7'($urandom)};
        if ($urandom % 16 == 0) in_data[i] = 16'h0000;
        if ($urandom % 8 == 0)  in_data[i][1:0] = 2'b10;     // ties
      end
      s_ref = 0;
      foreach (in_data[i]) if (int'(in_data[i][14:7]) > s_ref) s_ref = int'(in_data[i][14:7]);
      word = 16 * int'($urandom % 512);
      slot = int'($urandom % 16);
      @(negedge clk);
      in_valid = 1'b1;
      in_mode  = (blk % 2) ? MODE_TILE : MODE_1D;
      in_dst   = mx_dst_e'(blk % 3 == 0);
      in_word  = AW'(word);
      in_slot  = 4'(slot);
      checks++;
      if (!in_ready) failures++;
      @(negedge clk);
      in_valid = 1'b0;
      beats = 0;
      bytes_written = 0;
      while (!in_ready) begin
        checks++;
        if (!wr_valid || wr_dst != in_dst) failures++;
        @(negedge clk);
      end
      checks++;
      if (beats != ((in_mode == MODE_1D) ? 16 : 2) || bytes_written != 64) begin
        failures++;
        $display("blk %0d: %0d beats, %0d bytes", blk, beats, bytes_written);
      end
      checks++;
      if (int'(emem[word / 16][slot]) != s_ref) failures++;
      for (int i = 0; i < BLOCK; i++) begin
        int    waddr, lane;
        mxsf_t c;
        real   want, got;
        if (in_mode == MODE_1D) begin
          waddr = word + i / 4;
          lane  = slot * 4 + i % 4;
        end else begin
          waddr = word + 2 * (slot / 2) + (i % 8) / 4;
          lane  = ((slot % 2) * 8 + i / 8) * 4 + i % 4;
        end
        c    = mem[waddr][lane];
        got  = mxsf_val(c);
        want = mxsf_quant_ref(bf16_val(in_data[i]), s_ref);
        if (c[6:5] != 2'b00) n_e2m5++;
        else if (c[4:2] != 3'b000) n_e3m2++;
        else if (c[1:0] != 2'b00) n_sub++;
        checks++;
        if (got != want) begin
          failures++;
          if (failures < 10) $display("blk %0d el %0d x=%h S=%0d: code %h = %g want %g",
                                      blk, i, in_data[i], s_ref, c, got, want);
        end
      end
    end
    checks++;
    if (n_e2m5 == 0 || n_e3m2 == 0 || n_sub == 0) failures++;
    $display("codes: E2M5 %0d, E3M2 %0d, subnormal %0d", n_e2m5, n_e3m2, n_sub);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
