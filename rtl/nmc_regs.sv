// nmc_regs -- near-memory flip-flops and shifters of the ModSRAM datapath.
//
// Three full-width registers sit under the array: the multiplier, the sum and
// the carry, plus a four-bit overflow register. One modular multiplication
// uses them as follows (op comes from the controller every cycle):
//
//   NMC_LOAD_A    the multiplier row is read into the multiplier register,
//                 with one zero appended below it (Booth bit a_{-1} = 0) and
//                 zeros above it. Its top three bits feed the Booth encoder.
//   NMC_CSA_R4    radix-4 section: the XOR3 and MAJ words of the three-row
//                 read (LUT-radix4 entry, sum, carry) land in the sum and
//                 carry registers. At the same edge the overflow register
//                 takes the LUT-overflow index: the two bits that the
//                 previous <<2 of sum pushed out, the three that the previous
//                 <<3 of carry pushed out, and the MSB that the new carry
//                 loses to its <<1 (overflow_logic). The multiplier shifts
//                 left by two, exposing the next Booth triple.
//   NMC_WB_SUM    write data = sum          (sum row)
//   NMC_WB_CARRY  write data = carry << 1   (carry row; the lost MSB is
//                 already counted in the overflow index)
//   NMC_CSA_OV    overflow section: XOR3/MAJ of (LUT-overflow entry, sum,
//                 carry) land in the sum and carry registers.
//   NMC_WB_SUM2   write data = sum << 2     (the x4 of the next iteration is
//   NMC_WB_CARRY2 write data = carry << 3    applied on the way back)
//   NMC_LOAD_P    after the last iteration the multiplier register is free
//                 and takes the modulus row for the final reduction.
//   NMC_CLEAR     zero sum, carry and overflow before a new product.
//
// The write-back shifts (W, W<<1, W<<2, W<<3) and the <<2 of the multiplier
// follow the worked example of the paper. Widening the multiplier register
// for one more Booth digit, keeping the three carry bits, and reusing the
// multiplier register for p are this design's choices.
//
// Column N of the plain read word 'data' is not used (lint reports it):
// operands and the modulus are n bits wide, and only the sum and carry rows
// use that column, which arrive through xor3 and maj.
//
// Interface and timing: all registers update at the rising clock edge; the
// read data (xor3, maj, data) must be valid in the cycle of the op that
// captures it. wdata, digit_bits and the register outputs are combinational
// from the registers. ov_err is sticky until NMC_CLEAR and flags an overflow
// index beyond the table. Reset is asynchronous, active low.
module nmc_regs
  import modsram_pkg::*;
#(
  parameter int unsigned N    = 256,
  parameter int unsigned W    = N + 1,         // sum / carry row width
  parameter int unsigned ITER = N / 2 + 1,     // radix-4 digits of an N-bit multiplier
  parameter int unsigned MW   = 2 * ITER + 1   // multiplier register width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  nmc_op_t       op,
  input  logic [W-1:0]  xor3,
  input  logic [W-1:0]  maj,
  input  logic [W-1:0]  data,
  output logic [2:0]    digit_bits,
  output logic [3:0]    ov_idx_q,
  output logic [W-1:0]  wdata,
  output logic [W-1:0]  sum_q,
  output logic [W-1:0]  carry_q,
  output logic [N-1:0]  mod_q,
  output logic          ov_err
);

  logic [MW-1:0] mult_q;
  logic [3:0]    ov_idx_d;
  logic          ov_range_err;

  overflow_logic #(.OV_ENTRIES(NUM_OV)) u_ovl (
    .ov_sum      (sum_q[W-1 -: 2]),
    .ov_carry    (carry_q[W-1 -: 3]),
    .msb         (maj[W-1]),
    .ov_idx      (ov_idx_d),
    .ov_range_err(ov_range_err)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mult_q   <= '0;
      sum_q    <= '0;
      carry_q  <= '0;
      ov_idx_q <= '0;
      ov_err   <= 1'b0;
    end else begin
      unique case (op)
        NMC_CLEAR: begin
          sum_q    <= '0;
          carry_q  <= '0;
          ov_idx_q <= '0;
          ov_err   <= 1'b0;
        end
        NMC_LOAD_A: mult_q <= {(MW-N-1)'(0), data[N-1:0], 1'b0};
        NMC_CSA_R4: begin
          sum_q    <= xor3;
          carry_q  <= maj;
          ov_idx_q <= ov_idx_d;
          ov_err   <= ov_err | ov_range_err;
          mult_q   <= mult_q << 2;
        end
        NMC_CSA_OV: begin
          sum_q   <= xor3;
          carry_q <= maj;
        end
        NMC_LOAD_P: mult_q <= MW'(data[N-1:0]);
        default: ;
      endcase
    end
  end

  always_comb begin
    unique case (op)
      NMC_WB_CARRY:  wdata = carry_q << 1;
      NMC_WB_SUM2:   wdata = sum_q << 2;
      NMC_WB_CARRY2: wdata = carry_q << 3;
      default:       wdata = sum_q;
    endcase
  end

  assign digit_bits = mult_q[MW-1 -: 3];
  assign mod_q      = mult_q[N-1:0];

endmodule
