// modsram_pkg -- types and constants shared by the ModSRAM modular multiplier.
//
// Holds the radix-4 Booth digit type, the near-memory operation code sent by
// the controller to the flip-flop/shifter block, and the default row map of
// the 64-row array. The row map follows the order of the data-organisation
// picture of the design (operands, two intermediate rows, look-up-table rows);
// the exact row numbers are this design's choice. The overflow table has nine
// entries (0..8) instead of eight, because the overflow index can reach 8 when
// no carry bit is dropped (see overflow_logic).
package modsram_pkg;

  // Radix-4 Booth digit. The code is also the offset of the digit's row inside
  // LUT-radix4, in the row order of the precomputation table: 0, +1, +2, -2, -1.
  typedef enum logic [2:0] {
    ENC_ZERO = 3'd0,
    ENC_P1   = 3'd1,
    ENC_P2   = 3'd2,
    ENC_M2   = 3'd3,
    ENC_M1   = 3'd4
  } enc_t;

  // Operation of the near-memory registers in one cycle.
  typedef enum logic [3:0] {
    NMC_IDLE     = 4'd0,  // hold
    NMC_CLEAR    = 4'd1,  // clear sum/carry/overflow FFs
    NMC_LOAD_A   = 4'd2,  // multiplier FF <- read data (with a_{-1} = 0 below)
    NMC_CSA_R4   = 4'd3,  // sum/carry FFs <- XOR3/MAJ, overflow FF <- index, multiplier <<= 2
    NMC_CSA_OV   = 4'd4,  // sum/carry FFs <- XOR3/MAJ
    NMC_WB_SUM   = 4'd5,  // drive sum on the write data
    NMC_WB_CARRY = 4'd6,  // drive carry << 1 on the write data
    NMC_WB_SUM2  = 4'd7,  // drive sum << 2 on the write data
    NMC_WB_CARRY2= 4'd8,  // drive carry << 3 on the write data
    NMC_LOAD_P   = 4'd9   // modulus <- read data (reuses the multiplier FF)
  } nmc_op_t;

  // Source of the array's write data.
  typedef enum logic [1:0] {
    WSEL_HOST   = 2'd0,  // host row write
    WSEL_NMC    = 2'd1,  // near-memory write-back of sum or carry
    WSEL_RESULT = 2'd2   // final result
  } wsel_t;

  localparam int unsigned ROW_AW       = 6;   // row address width for 64 rows
  localparam int unsigned NUM_R4       = 5;   // LUT-radix4 entries: 0, +1, +2, -2, -1
  localparam int unsigned NUM_OV       = 9;   // LUT-overflow entries: 0..8
  localparam int unsigned ROW_SUM      = 48;  // intermediate sum row
  localparam int unsigned ROW_CARRY    = 49;  // intermediate carry row
  localparam int unsigned ROW_R4_BASE  = 50;  // rows 50..54
  localparam int unsigned ROW_OV_BASE  = 55;  // rows 55..63
  localparam int unsigned NUM_OPERAND_ROWS = 48;  // rows 0..47 for operands

endpackage
