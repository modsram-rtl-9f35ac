// tb_modsram -- end-to-end test of the ModSRAM macro at n = 16.
// The host loads operands and precomputed LUT rows, runs products and checks
// each result against an independent bit-serial modular multiplication, the
// loop length against 6*(n/2+1)-1 cycles and the total against the bound for
// a modulus with its top bit set. Operands cover random values, moduli with
// and without the top bit, A or B equal to 0 or p, and two products known to
// reach overflow index 8. Every mechanism (each Booth digit, non-zero and
// ninth overflow entries, the skipped first reads, reduction, host reads) is
// counted and must occur.
module tb_modsram;
  import mm_ref_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, rd_en = 0, start = 0;
  logic [5:0] wr_row = '0, rd_row = '0, a_row = '0, p_row = '0, c_row = '0;
  logic [N:0] wr_data = '0, rd_data;
  logic rd_valid, busy, done, ov_err, pre_en;
  logic [N-1:0] result;
  int checks = 0, failures = 0;

  modsram #(.N(N)) dut (.clk, .rst_n, .wr_en, .wr_row, .wr_data, .rd_en, .rd_row, .rd_data,
    .rd_valid, .start, .a_row, .p_row, .c_row, .busy, .done, .result, .ov_err, .pre_en);

  always #5 clk = ~clk;

  `include "modsram_drive.svh"

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    big_t p;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // products that reach the ninth overflow entry
    mm_load_and_run(big_t'(16'h5b5b), big_t'(16'hbfc2), big_t'(16'he5ad));
    mm_load_and_run(big_t'(16'ha570), big_t'(16'h2b36), big_t'(16'heb9b));
    // edge operands
    p = big_t'(16'hfff1);
    mm_load_and_run(p, p, p);
    mm_load_and_run(big_t'(0), p - 1, p);
    mm_load_and_run(p - 1, p - 1, p);
    // random, top bit set and not
    for (int t = 0; t < 60; t++) begin
      p = rand_bits(N);
      if (t % 3 != 0) p[N-1] = 1'b1;
      if (p < 3) p = big_t'(3);
      mm_load_and_run(rand_below(p + 1, N), rand_below(p + 1, N), p);
    end
    report_mechanisms(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
