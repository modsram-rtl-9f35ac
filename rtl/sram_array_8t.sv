// sram_array_8t -- 8T SRAM array with a write port and a multi-row read port.
//
// Each cell is a standard 8T cell: a 6T latch written through WWL and the
// BL/BLB pair, plus a two-transistor read stack that discharges its read
// bitline (RBL) when its RWL is high and the cell stores 1. Because the read
// port is decoupled, several RWLs can be opened at once without read disturb;
// the ModSRAM datapath opens three. The voltage left on each precharged RBL
// then depends on how many opened cells hold 1. This model represents that
// level digitally as the count of discharging cells, 0..3 (saturating), on
// rbl_cnt; the logic sense amplifiers turn it into XOR3 and MAJ.
//
// Interface and timing: a write of wdata into the row whose wwl bit is high
// happens at the rising clock edge. The read is combinational: rbl_cnt follows
// rwl and the stored contents within the same cycle (precharge and evaluation
// both inside one clock). Writing and reading the same row in one cycle gives
// the old contents. The array is not reset, as an SRAM powers up unknown.
//
// Size: the design uses 64 rows. It uses N+1 = 257 columns rather than 256,
// so that the (n+1)-bit sum and carry rows of the algorithm fit; that column
// count is this design's choice.
module sram_array_8t #(
  parameter int unsigned ROWS = 64,
  parameter int unsigned COLS = 257
) (
  input  logic                  clk,
  input  logic [ROWS-1:0]       wwl,
  input  logic [COLS-1:0]       wdata,
  input  logic [ROWS-1:0]       rwl,
  output logic [COLS-1:0][1:0]  rbl_cnt
);

  logic [COLS-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    for (int r = 0; r < ROWS; r++) begin
      if (wwl[r]) mem[r] <= wdata;
    end
  end

  // Count, per column, the opened cells that pull the RBL down.
  for (genvar c = 0; c < COLS; c++) begin : g_rbl
    always_comb begin
      rbl_cnt[c] = 2'd0;
      for (int r = 0; r < ROWS; r++) begin
        if (rwl[r] && mem[r][c] && rbl_cnt[c] != 2'd3) rbl_cnt[c] = rbl_cnt[c] + 2'd1;
      end
    end
  end

  // A write wordline decoder opens at most one row; the logic read opens at most three.
  always_ff @(posedge clk) begin
    assert ($countones(wwl) <= 1) else $error("sram_array_8t: more than one WWL high");
    assert ($countones(rwl) <= 3) else $error("sram_array_8t: more than three RWLs high");
  end

endmodule
