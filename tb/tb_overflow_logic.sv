// tb_overflow_logic -- exhaustive check of the overflow index adder and its
// out-of-table flag (table of 9 entries).
module tb_overflow_logic;
  logic [1:0] ov_sum;
  logic [2:0] ov_carry;
  logic       msb;
  logic [3:0] ov_idx;
  logic       ov_range_err;
  int checks = 0, failures = 0;

  overflow_logic #(.OV_ENTRIES(9)) dut (.ov_sum, .ov_carry, .msb, .ov_idx, .ov_range_err);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 4; s++)
      for (int c = 0; c < 8; c++)
        for (int m = 0; m < 2; m++) begin
          ov_sum = 2'(s); ov_carry = 3'(c); msb = m[0];
          #1;
          checks++;
          if (int'(ov_idx) != s + c + m || ov_range_err !== (s + c + m > 8)) begin
            failures++; $display("FAIL s=%0d c=%0d m=%0d idx=%0d err=%b", s, c, m, ov_idx, ov_range_err);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
