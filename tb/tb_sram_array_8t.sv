// tb_sram_array_8t -- checks the 8T array model at its default 64 x 257 size.
// Rows are written with random data through one-hot WWLs while a shadow copy
// is kept; then random sets of one to three rows are opened on the read port
// and every column's discharge count is compared with the number of ones the
// shadow copy holds in that column. A same-cycle read of a row being written
// must still see the old data.
module tb_sram_array_8t;
  localparam int ROWS = 64;
  localparam int COLS = 257;
  logic                 clk = 0;
  logic [ROWS-1:0]      wwl, rwl;
  logic [COLS-1:0]      wdata;
  logic [COLS-1:0][1:0] rbl_cnt;
  logic [COLS-1:0]      shadow [ROWS];
  int checks = 0, failures = 0;

  sram_array_8t #(.ROWS(ROWS), .COLS(COLS)) dut (.clk, .wwl, .wdata, .rwl, .rbl_cnt);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [COLS-1:0] rand_row();
    logic [COLS-1:0] v;
    for (int i = 0; i < COLS; i++) v[i] = 1'($urandom);
    return v;
  endfunction

  task automatic check_read(input int nrows);
    int r [3];
    rwl = '0;
    for (int i = 0; i < nrows; i++) begin
      do r[i] = $urandom_range(0, ROWS - 1); while (rwl[r[i]]);
      rwl[r[i]] = 1'b1;
    end
    #1;
    for (int c = 0; c < COLS; c++) begin
      int k = 0;
      for (int i = 0; i < nrows; i++) k += int'(shadow[r[i]][c]);
      checks++;
      if (int'(rbl_cnt[c]) != k) begin
        failures++;
        if (failures < 10) $display("FAIL rows=%0d col=%0d cnt=%0d exp=%0d", nrows, c, rbl_cnt[c], k);
      end
    end
  endtask

  initial begin
    wwl = '0; rwl = '0; wdata = '0;
    // fill every row
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wdata = rand_row(); wwl = '0; wwl[r] = 1'b1;
      shadow[r] = wdata;
    end
    @(negedge clk); wwl = '0;
    for (int t = 0; t < 60; t++) begin
      @(negedge clk);
      check_read(1 + (t % 3));
    end
    // write one row while reading it: read sees old contents, next cycle new
    @(negedge clk);
    rwl = '0; rwl[7] = 1'b1;
    wdata = ~shadow[7]; wwl = '0; wwl[7] = 1'b1;
    #1;
    for (int c = 0; c < COLS; c++) begin
      checks++;
      if (int'(rbl_cnt[c]) != int'(shadow[7][c])) failures++;
    end
    shadow[7] = wdata;
    @(negedge clk); wwl = '0;
    #1;
    for (int c = 0; c < COLS; c++) begin
      checks++;
      if (int'(rbl_cnt[c]) != int'(shadow[7][c])) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
