// tb_logic_sa -- checks the logic sense-amplifier block.
// Random per-column levels 0..3 (number of opened cells holding 1) must give
// XOR3 = odd count, MAJ = count >= 2 and data = count >= 1; with sa_en low
// every output must be 0.
module tb_logic_sa;
  localparam int COLS = 24;
  logic                 sa_en;
  logic [COLS-1:0][1:0] rbl_cnt;
  logic [COLS-1:0]      xor3, maj, data;
  int checks = 0, failures = 0;

  logic_sa #(.COLS(COLS)) dut (.sa_en, .rbl_cnt, .xor3, .maj, .data);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      sa_en = (t % 10) != 9;
      for (int c = 0; c < COLS; c++) rbl_cnt[c] = 2'($urandom_range(0, 3));
      #1;
      for (int c = 0; c < COLS; c++) begin
        int k;
        logic ex, em, ed;
        k = int'(rbl_cnt[c]);
        ex = sa_en && (k % 2 == 1);
        em = sa_en && (k >= 2);
        ed = sa_en && (k >= 1);
        checks++;
        if (xor3[c] !== ex || maj[c] !== em || data[c] !== ed) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d col=%0d k=%0d en=%b got %b%b%b", t, c, k, sa_en, xor3[c], maj[c], data[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
