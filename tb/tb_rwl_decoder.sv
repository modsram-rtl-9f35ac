// tb_rwl_decoder -- checks the three-port read wordline decoder.
// Random enables and addresses; the expected wordline vector is built by
// setting one bit per enabled port.
module tb_rwl_decoder;
  localparam int ROWS = 64;
  logic [2:0]      en;
  logic [2:0][5:0] addr;
  logic [ROWS-1:0] rwl, exp_rwl;
  int checks = 0, failures = 0;

  rwl_decoder #(.ROWS(ROWS), .NPORT(3)) dut (.en, .addr, .rwl);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      en = 3'($urandom);
      for (int p = 0; p < 3; p++) addr[p] = 6'($urandom);
      exp_rwl = '0;
      for (int p = 0; p < 3; p++) if (en[p]) exp_rwl[addr[p]] = 1'b1;
      #1;
      checks++;
      if (rwl !== exp_rwl) begin
        failures++;
        if (failures < 10) $display("FAIL en=%b addr=%p rwl=%h exp=%h", en, addr, rwl, exp_rwl);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
