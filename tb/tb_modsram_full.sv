// tb_modsram_full -- the ModSRAM macro at its default size (n = 256, 64 rows
// of 257 bits): three complete 256-bit modular multiplications, checked
// against an independent bit-serial reference, with the loop length
// (773 cycles) and total latency checked. The moduli are the secp256k1 field
// prime, the BN254 base-field prime and a random 256-bit odd modulus.
module tb_modsram_full;
  import mm_ref_pkg::*;
  localparam int N = 256;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, rd_en = 0, start = 0;
  logic [5:0] wr_row = '0, rd_row = '0, a_row = '0, p_row = '0, c_row = '0;
  logic [N:0] wr_data = '0, rd_data;
  logic rd_valid, busy, done, ov_err, pre_en;
  logic [N-1:0] result;
  int checks = 0, failures = 0;

  modsram dut (.clk, .rst_n, .wr_en, .wr_row, .wr_data, .rd_en, .rd_row, .rd_data,
    .rd_valid, .start, .a_row, .p_row, .c_row, .busy, .done, .result, .ov_err, .pre_en);

  always #5 clk = ~clk;

  `include "modsram_drive.svh"

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    big_t p;
    repeat (3) @(negedge clk);
    rst_n = 1;
    p = big_t'(256'hFFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFE_FFFFFC2F);
    mm_load_and_run(rand_below(p, N), rand_below(p, N), p);
    p = big_t'(256'h30644E72_E131A029_B85045B6_8181585D_97816A91_6871CA8D_3C208C16_D87CFD47);
    mm_load_and_run(rand_below(p, N), rand_below(p, N), p);
    p = rand_bits(N); p[N-1] = 1'b1; p[0] = 1'b1;
    mm_load_and_run(rand_below(p, N), rand_below(p, N), p);
    $display("full-size products: %0d", n_products);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
