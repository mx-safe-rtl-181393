// tb_mxsf_decoder: exhaustive check of the MXSF element decoder. Every one
// of the 256 codes is decoded and the E4M5 value compared with the value
// given by the MXSF format definition; the mode flag is checked too.
module tb_mxsf_decoder;
  import mxsf_pkg::*;
  import tb_ref_pkg::*;
  mxsf_t code;
  e4m5_t op;
  logic  is_subfp;
  int    checks = 0, failures = 0;

  mxsf_decoder dut (.code(code), .op(op), .is_subfp(is_subfp));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 256; c++) begin
      code = 8'(c);
      #1;
      checks++;
      if (e4m5_val(op) != mxsf_val(code)) begin
        failures++;
        $display("code %02h: got %g want %g", code, e4m5_val(op), mxsf_val(code));
      end
      checks++;
      if (is_subfp != (code[6:5] == 2'b00)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
