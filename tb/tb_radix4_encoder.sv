// tb_radix4_encoder -- exhaustive check of the radix-4 Booth encoder.
// The expected digit is computed arithmetically as -2*a_{i+1} + a_i + a_{i-1}
// and mapped to the digit code 0:0, 1:+1, 2:+2, 3:-2, 4:-1.
module tb_radix4_encoder;
  import modsram_pkg::*;
  logic [2:0] bits;
  enc_t       enc;
  int checks = 0, failures = 0;

  radix4_encoder dut (.bits, .enc);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < 8; b++) begin
      int d;
      logic [2:0] code;
      bits = 3'(b);
      d = -2 * b[2] + b[1] + b[0];
      case (d)
        0: code = 3'd0; 1: code = 3'd1; 2: code = 3'd2; -2: code = 3'd3; default: code = 3'd4;
      endcase
      #1;
      checks++;
      if (3'(enc) !== code) begin failures++; $display("FAIL bits=%b enc=%0d exp=%0d", bits, enc, code); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
