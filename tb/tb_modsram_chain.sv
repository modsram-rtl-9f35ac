// tb_modsram_chain -- data reuse at the default size (n = 256).
// The tables for one multiplicand B and the secp256k1 prime are loaded once;
// then eight products are chained inside the array, each taking the previous
// result row as its multiplier (x, x*B, x*B^2, ... mod p), with results
// alternating between two rows. Only the first operand and p are ever
// written by the host. A second phase changes B to the last result (by
// rewriting only the five LUT-radix4 rows) and squares that result into
// a new row, the kind of reuse an elliptic-curve formula makes. Every result is
// checked against an independent bit-serial reference, and every latency
// against 6*ITER+3 plus at most 12 reduction cycles.
module tb_modsram_chain;
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
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    big_t p, b, x, y, got;
    repeat (3) @(negedge clk);
    rst_n = 1;
    p = big_t'(256'hFFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFE_FFFFFC2F);
    b = rand_below(p, N);
    x = rand_below(p, N);
    host_write(1, p);
    host_write(10, x);
    mm_load_luts(b, p);
    // chain: row 10 -> 11 -> 10 -> ...
    for (int k = 0; k < 8; k++) begin
      x = mod_mul(x, b, p, N);
      mm_run_rows((k % 2 == 0) ? 10 : 11, 1, (k % 2 == 0) ? 11 : 10, x);
    end
    // the last result sits in row 10; read it back
    host_read(10, got);
    checks++;
    if (got != x) begin failures++; $display("FAIL chained row readback"); end
    // new multiplicand y = x: reload LUT-radix4 only, compute x^2 into row 12
    y = x;
    for (int d = 0; d < 5; d++) host_write(50 + d, lut_r4(d, y, p));
    mm_run_rows(10, 1, 12, mod_mul(x, y, p, N));
    $display("products run from array rows: %0d", n_products);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
