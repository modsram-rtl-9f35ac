// tb_latch_sa -- exhaustive check of the latch-type sense-amplifier model.
// Every level/reference pair with SA_EN high must resolve to complementary
// outputs with Voutp = (level >= reference); with SA_EN low both outputs must
// sit high.
module tb_latch_sa;
  logic       sa_en;
  logic [1:0] vinp, vinn;
  logic       voutp, voutn;
  int checks = 0, failures = 0;

  latch_sa #(.LW(2)) dut (.sa_en, .vinp, .vinn, .voutp, .voutn);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < 4; a++)
        for (int b = 0; b < 4; b++) begin
          sa_en = e[0]; vinp = a[1:0]; vinn = b[1:0];
          #1;
          checks++;
          if (e == 0) begin
            if (!(voutp && voutn)) begin failures++; $display("FAIL precharge a=%0d b=%0d", a, b); end
          end else if (voutp !== (a >= b) || voutn !== (a < b)) begin
            failures++; $display("FAIL a=%0d b=%0d p=%b n=%b", a, b, voutp, voutn);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
