// tb_modsram_ctrl -- checks the controller's schedule at n = 8 (5 iterations).
// A cycle-by-cycle expected sequence of (read ports, write row, near-memory
// operation) is generated from the schedule of one multiplication and
// compared with what the controller drives; the loop length must be
// 6*ITER-1 cycles, the final adder's done is emulated after a random delay,
// done must pulse once with the result row written, and host reads and writes
// must reach the ports only while idle.
module tb_modsram_ctrl;
  import modsram_pkg::*;
  localparam int N = 8;
  localparam int ITER = N / 2 + 1;
  logic clk = 0, rst_n = 0;
  logic start = 0, rd_en = 0, wr_en = 0, fa_done = 0;
  logic [5:0] a_row = 6'd3, p_row = 6'd4, c_row = 6'd5, rd_row = 6'd9, wr_row = 6'd10, lut_row;
  logic busy, done, rd_valid, sel_ov, wr_port_en, sa_en, pre_en, fa_start;
  logic [2:0] rd_port_en;
  logic [2:0][5:0] rd_port_addr;
  logic [5:0] wr_port_addr;
  wsel_t wsel;
  nmc_op_t nmc_op;
  int checks = 0, failures = 0;

  assign lut_row = sel_ov ? 6'd60 : 6'd51;   // stand-in for the LUT multiplexer

  modsram_ctrl #(.N(N)) dut (.clk, .rst_n, .start, .a_row, .p_row, .c_row, .rd_en, .rd_row,
    .wr_en, .wr_row, .busy, .done, .rd_valid, .lut_row, .fa_done, .sel_ov, .rd_port_en,
    .rd_port_addr, .wr_port_en, .wr_port_addr, .wsel, .sa_en, .pre_en, .nmc_op, .fa_start);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_cycle(input string tag, input nmc_op_t op, input logic [2:0] ren,
                              input int r0, input int r2, input logic wen, input int wrow);
    checks++;
    if (nmc_op !== op || rd_port_en !== ren || (ren[0] && int'(rd_port_addr[0]) != r0) ||
        (ren[2] && int'(rd_port_addr[2]) != r2) || wr_port_en !== wen ||
        (wen && int'(wr_port_addr) != wrow) || sa_en !== (ren != 0) || pre_en !== (ren == 0) || done !== 1'b0) begin
      failures++;
      $display("FAIL %s: op=%0d ren=%b a0=%0d a2=%0d wen=%b wa=%0d sa=%b", tag, nmc_op, rd_port_en,
               rd_port_addr[0], rd_port_addr[2], wr_port_en, wr_port_addr, sa_en);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      int loop_cycles, wait_cyc;
      loop_cycles = 0;
      // host access while idle
      @(negedge clk);
      rd_en = 1; wr_en = 1;
      #1;
      checks++;
      if (!(rd_port_en == 3'b001 && rd_port_addr[0] == rd_row && sa_en && wr_port_en &&
            wr_port_addr == wr_row && wsel == WSEL_HOST)) begin
        failures++; $display("FAIL host access");
      end
      @(negedge clk);
      checks++;
      if (!rd_valid) begin failures++; $display("FAIL rd_valid"); end
      rd_en = 0; wr_en = 0;
      start = 1;
      #1;
      checks++;
      if (nmc_op !== NMC_CLEAR) begin failures++; $display("FAIL clear on start"); end
      @(negedge clk);
      start = 0;
      // host requests during the run must be ignored
      rd_en = 1; wr_en = 1;
      expect_cycle("load_a", NMC_LOAD_A, 3'b001, a_row, 0, 0, 0); loop_cycles++;
      for (int i = ITER - 1; i >= 0; i--) begin
        @(negedge clk);
        expect_cycle("r4_rd", NMC_CSA_R4, (i == ITER - 1) ? 3'b100 : 3'b111, ROW_SUM, 51, 0, 0);
        checks++; if (sel_ov) failures++;
        loop_cycles++;
        @(negedge clk); expect_cycle("r4_ws", NMC_WB_SUM, 3'b000, 0, 0, 1, ROW_SUM); loop_cycles++;
        @(negedge clk); expect_cycle("r4_wc", NMC_WB_CARRY, 3'b000, 0, 0, 1, ROW_CARRY); loop_cycles++;
        @(negedge clk);
        expect_cycle("ov_rd", NMC_CSA_OV, 3'b111, ROW_SUM, 60, 0, 0);
        checks++; if (!sel_ov) failures++;
        loop_cycles++;
        if (i > 0) begin
          @(negedge clk); expect_cycle("ov_ws", NMC_WB_SUM2, 3'b000, 0, 0, 1, ROW_SUM); loop_cycles++;
          @(negedge clk); expect_cycle("ov_wc", NMC_WB_CARRY2, 3'b000, 0, 0, 1, ROW_CARRY); loop_cycles++;
        end
      end
      checks++;
      if (loop_cycles != 6 * ITER - 1) begin failures++; $display("FAIL loop %0d", loop_cycles); end
      @(negedge clk);
      expect_cycle("load_p", NMC_LOAD_P, 3'b001, p_row, 0, 0, 0);
      checks++; if (!fa_start) failures++;
      wait_cyc = $urandom_range(1, 6);
      repeat (wait_cyc) begin
        @(negedge clk);
        checks++;
        if (wr_port_en || done || !busy) begin failures++; $display("FAIL while reducing"); end
      end
      fa_done = 1;
      @(negedge clk);
      checks++;
      if (!(done && wr_port_en && wr_port_addr == c_row && wsel == WSEL_RESULT)) begin
        failures++; $display("FAIL result write-back");
      end
      @(negedge clk);
      checks++;
      if (busy || done) begin failures++; $display("FAIL not idle after done"); end
      fa_done = 0; rd_en = 0; wr_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
