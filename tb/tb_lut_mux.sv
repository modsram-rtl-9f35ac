// tb_lut_mux -- exhaustive check of the LUT wordline multiplexer against the
// row map (LUT-radix4 at 50..54, LUT-overflow at 55..63).
module tb_lut_mux;
  import modsram_pkg::*;
  logic       sel_ov;
  enc_t       enc;
  logic [3:0] ov_idx;
  logic [5:0] row;
  int checks = 0, failures = 0;

  lut_mux dut (.sel_ov, .enc, .ov_idx, .row);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 2; s++)
      for (int e = 0; e < 5; e++)
        for (int k = 0; k < 9; k++) begin
          int ex;
          sel_ov = s[0]; enc = enc_t'(e); ov_idx = 4'(k);
          ex = s ? 55 + k : 50 + e;
          #1;
          checks++;
          if (int'(row) != ex) begin failures++; $display("FAIL s=%0d e=%0d k=%0d row=%0d exp=%0d", s, e, k, row, ex); end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
