// modsram_drive.svh -- host-side tasks and mechanism counters shared by the
// ModSRAM end-to-end testbenches. Included inside a testbench module that
// declares: localparam int N; the DUT signals of modsram; clk; checks and
// failures counters; and imports mm_ref_pkg.
//
// mm_load_and_run(a, b, p) plays the host: it writes A and p into operand
// rows, computes and writes the five LUT-radix4 rows and nine LUT-overflow
// rows for this B and p, starts the multiplication, waits for done and
// compares the result port, the result row (read back through the host read
// port) and the loop cycle count with the independent reference.
// mm_load_luts(b, p) writes only the 14 table rows; mm_run_rows runs a product
// on rows already in the array and checks its result and latency.

localparam int ITER = N / 2 + 1;
// controller state codes (declaration order of modsram_ctrl's state_t)
localparam int ST_LOAD_A = 1, ST_R4_RD = 2, ST_OV_RD = 5, ST_OV_WC = 7, ST_REDUCE = 9;
localparam int A_ROW = 0, P_ROW = 1, C_ROW = 2;

// mechanism counters
int n_digit [5];        // Booth digits used: 0, +1, +2, -2, -1
int n_ov_nonzero = 0;   // overflow-section reads of a non-zero LUT-overflow row
int n_ov_eight   = 0;   // overflow index 8 (the ninth table entry)
int n_first_skip = 0;   // first radix-4 reads that leave sum/carry closed
int n_reduce     = 0;   // products whose reduction subtracted p at least once
int n_host_rd    = 0;   // host row reads checked
int n_products   = 0;
int n_pre_off    = 0;   // cycles with the bitline precharge released
int n_pre_bad    = 0;   // logic-read cycles with precharge still on

task automatic host_write(input int row, input big_t val);
  @(negedge clk);
  wr_en = 1; wr_row = 6'(row); wr_data = val[N:0];
  @(negedge clk);
  wr_en = 0;
endtask

task automatic host_read(input int row, output big_t val);
  @(negedge clk);
  rd_en = 1; rd_row = 6'(row);
  @(negedge clk);
  rd_en = 0;
  if (!rd_valid) begin failures++; $display("FAIL rd_valid missing"); end
  val = big_t'(rd_data);
endtask

task automatic mm_load_and_run(input big_t a, input big_t b, input big_t p);
  big_t ex, got_row;
  int loop_cyc, total_cyc;
  ex = mod_mul(a, b, p, N);
  host_write(A_ROW, a);
  host_write(P_ROW, p);
  for (int d = 0; d < 5; d++) host_write(50 + d, lut_r4(d, b, p));
  for (int k = 0; k < 9; k++) host_write(55 + k, lut_ov(k, p, N));
  @(negedge clk);
  start = 1; a_row = 6'(A_ROW); p_row = 6'(P_ROW); c_row = 6'(C_ROW);
  @(negedge clk);
  start = 0;
  loop_cyc = 0; total_cyc = 1;
  while (!done && total_cyc < 20 * N + 100000) begin
    if (int'(dut.u_ctrl.state_q) inside {[ST_LOAD_A:ST_OV_WC]})
      loop_cyc++;
    @(negedge clk);
    total_cyc++;
  end
  n_products++;
  checks++;
  if (!done) begin failures++; $display("FAIL no done"); return; end
  checks++;
  if (big_t'(result) != ex) begin
    failures++; $display("FAIL A=%h B=%h p=%h got %h exp %h", a[N-1:0], b[N-1:0], p[N-1:0], result, ex[N-1:0]);
  end
  checks++;
  if (loop_cyc != 6 * ITER - 1) begin failures++; $display("FAIL loop cycles %0d exp %0d", loop_cyc, 6 * ITER - 1); end
  if (p >= (big_t'(1) << (N - 1))) begin
    checks++;
    if (total_cyc > 6 * ITER + 3 + 12) begin failures++; $display("FAIL total cycles %0d", total_cyc); end
  end
  checks++;
  if (ov_err) begin failures++; $display("FAIL overflow index beyond table"); end
  @(negedge clk);
  checks++;
  if (busy) begin failures++; $display("FAIL still busy"); end
  host_read(C_ROW, got_row);
  n_host_rd++;
  checks++;
  if (got_row != ex) begin failures++; $display("FAIL result row %h exp %h", got_row[N:0], ex[N:0]); end
endtask

// Count mechanisms from the controller's and datapath's state every cycle.
always @(posedge clk) begin
  if (rst_n) begin
    if (int'(dut.u_ctrl.state_q) == ST_R4_RD) begin
      n_digit[int'(dut.u_enc.enc)]++;
      if (dut.u_ctrl.first_q && dut.rd_port_en == 3'b100) n_first_skip++;
    end
    if (int'(dut.u_ctrl.state_q) == ST_OV_RD) begin
      if (dut.ov_idx != 0) n_ov_nonzero++;
      if (dut.ov_idx == 8) n_ov_eight++;
    end
    if (!pre_en) n_pre_off++;
    if ((int'(dut.u_ctrl.state_q) == ST_R4_RD || int'(dut.u_ctrl.state_q) == ST_OV_RD) && pre_en)
      n_pre_bad++;
    if (dut.u_fa.busy_q && int'(dut.u_ctrl.state_q) == ST_REDUCE &&
        big_t'(dut.u_fa.acc_q) >= big_t'(dut.mod_q)) n_reduce++;
  end
end

task automatic report_mechanisms(input bit need_eight);
  string nm [5] = '{"0", "+1", "+2", "-2", "-1"};
  for (int d = 0; d < 5; d++) begin
    $display("mechanism: Booth digit %s used %0d times", nm[d], n_digit[d]);
    checks++; if (n_digit[d] == 0) begin failures++; $display("FAIL digit %s never used", nm[d]); end
  end
  $display("mechanism: non-zero LUT-overflow reads %0d", n_ov_nonzero);
  checks++; if (n_ov_nonzero == 0) failures++;
  $display("mechanism: overflow index 8 reads %0d", n_ov_eight);
  if (need_eight) begin checks++; if (n_ov_eight == 0) failures++; end
  $display("mechanism: first-iteration sum/carry skipped %0d", n_first_skip);
  checks++; if (n_first_skip != n_products) failures++;
  $display("mechanism: reduction subtractions %0d", n_reduce);
  checks++; if (n_reduce == 0) failures++;
  $display("mechanism: precharge released for %0d read cycles", n_pre_off);
  checks++; if (n_pre_off == 0 || n_pre_bad != 0) begin failures++; $display("FAIL precharge during a logic read %0d", n_pre_bad); end
  $display("mechanism: host row reads %0d, products %0d", n_host_rd, n_products);
  checks++; if (n_host_rd == 0) failures++;
endtask

// Load the 14 table rows for multiplicand b and modulus p.
task automatic mm_load_luts(input big_t b, input big_t p);
  for (int d = 0; d < 5; d++) host_write(50 + d, lut_r4(d, b, p));
  for (int k = 0; k < 9; k++) host_write(55 + k, lut_ov(k, p, N));
endtask

// Run one product on rows already in the array and check it against ex.
task automatic mm_run_rows(input int ar, input int pr, input int cr, input big_t ex);
  int cyc;
  @(negedge clk);
  start = 1; a_row = 6'(ar); p_row = 6'(pr); c_row = 6'(cr);
  @(negedge clk);
  start = 0;
  cyc = 1;
  while (!done && cyc < 20 * N + 100000) begin @(negedge clk); cyc++; end
  n_products++;
  checks++;
  if (!done || big_t'(result) != ex) begin
    failures++; $display("FAIL rows a=%0d p=%0d c=%0d got %h exp %h", ar, pr, cr, result, ex[N-1:0]);
  end
  // latency: 6*ITER+3 plus one cycle per reduction subtraction (<= 12 here)
  checks++;
  if (cyc < 6 * ITER + 3 || cyc > 6 * ITER + 3 + 12) begin
    failures++; $display("FAIL latency %0d", cyc);
  end
  @(negedge clk);
endtask
