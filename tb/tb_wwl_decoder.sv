// tb_wwl_decoder -- exhaustive check of the write wordline decoder.
module tb_wwl_decoder;
  localparam int ROWS = 64;
  logic            en;
  logic [5:0]      addr;
  logic [ROWS-1:0] wwl;
  int checks = 0, failures = 0;

  wwl_decoder #(.ROWS(ROWS)) dut (.en, .addr, .wwl);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < ROWS; a++) begin
        logic [ROWS-1:0] ex;
        en = e[0]; addr = 6'(a);
        ex = e ? (64'd1 << a) : '0;
        #1;
        checks++;
        if (wwl !== ex) begin failures++; $display("FAIL en=%0d a=%0d wwl=%h", e, a, wwl); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
