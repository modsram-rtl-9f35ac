// modsram -- ModSRAM: an SRAM macro that computes large modular products.
//
// The macro multiplies two n-bit numbers modulo an n-bit p (n = 256 by
// default) inside an 8T SRAM array, using the R4CSA-LUT algorithm: a radix-4
// Booth-encoded interleaved multiplication whose additions are carry-save, so
// that every addition is a bitwise XOR3 (sum) and MAJ (carry) of three rows,
// computed by opening three read wordlines at once and sensing each read
// bitline with three sense amplifiers. Everything that would otherwise need a
// reduction is read from look-up rows precomputed by the host:
//   LUT-radix4   rows for the Booth digits 0, +1, +2, -2, -1:
//                0, B, 2B mod p, -2B mod p, -B mod p
//   LUT-overflow rows k = 0..8: k * 2^(n+1) mod p
// B, the multiplicand, is present only through LUT-radix4. The multiplier A
// and the modulus p are ordinary rows. The final sum + carry and its
// reduction are done near the memory in final_adder.
//
// Blocks: sram_array_8t (array), rwl_decoder / wwl_decoder (wordlines),
// logic_sa (three latch_sa per bitline), nmc_regs (multiplier, sum, carry and
// overflow registers with shifters; contains overflow_logic), radix4_encoder,
// lut_mux, final_adder, modsram_ctrl.
//
// Row map (modsram_pkg): 0..47 free for operands, 48 sum, 49 carry, 50..54
// LUT-radix4, 55..63 LUT-overflow. Rows are N+1 bits wide.
//
// Host interface (this design's own; only legal while busy is low):
//   wr_en/wr_row/wr_data  write a row at the clock edge.
//   rd_en/rd_row          read a row; rd_data is valid with rd_valid one
//                         cycle later.
//   start/a_row/p_row/c_row  start C = A*B mod p with A in a_row, p in p_row,
//                         the LUT rows already loaded for this B and p; the
//                         result is written to c_row (which must not be 48 or
//                         49). busy stays high until done pulses; result then
//                         holds C, and ov_err reports an overflow index beyond
//                         the table (not observed).
//   pre_en                bitline precharge enable for the analog precharge
//                         devices, which are not part of this RTL: high in
//                         every cycle that opens no read wordline.
// Timing: 773 cycles for the loop at n = 256 (6*(n/2+1)-1), then 1 cycle to
// load p, 1 + k cycles of reduction (k <= 12 for p >= 2^(n-1)) and 1 write
// cycle.
module modsram
  import modsram_pkg::*;
#(
  parameter int unsigned N    = 256,
  parameter int unsigned ROWS = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [ROW_AW-1:0] wr_row,
  input  logic [N:0]        wr_data,
  input  logic              rd_en,
  input  logic [ROW_AW-1:0] rd_row,
  output logic [N:0]        rd_data,
  output logic              rd_valid,
  input  logic              start,
  input  logic [ROW_AW-1:0] a_row,
  input  logic [ROW_AW-1:0] p_row,
  input  logic [ROW_AW-1:0] c_row,
  output logic              busy,
  output logic              done,
  output logic [N-1:0]      result,
  output logic              ov_err,
  output logic              pre_en
);

  localparam int unsigned W = N + 1;

  // controller outputs
  logic                   sel_ov, sa_en, fa_start, wr_port_en, fa_done;
  logic [2:0]             rd_port_en;
  logic [2:0][ROW_AW-1:0] rd_port_addr;
  logic [ROW_AW-1:0]      wr_port_addr, lut_row;
  wsel_t                  wsel;
  nmc_op_t                nmc_op;

  // array and sensing
  logic [ROWS-1:0]        rwl, wwl;
  logic [W-1:0]           wdata;
  logic [W-1:0][1:0]      rbl_cnt;
  logic [W-1:0]           xor3, maj, sa_data;

  // near-memory
  logic [2:0]             digit_bits;
  enc_t                   enc;
  logic [3:0]             ov_idx;
  logic [W-1:0]           nmc_wdata, sum_q, carry_q;
  logic [N-1:0]           mod_q;

  modsram_ctrl #(.N(N)) u_ctrl (
    .clk, .rst_n,
    .start, .a_row, .p_row, .c_row,
    .rd_en, .rd_row, .wr_en, .wr_row,
    .busy, .done, .rd_valid,
    .lut_row, .fa_done,
    .sel_ov, .rd_port_en, .rd_port_addr, .wr_port_en, .wr_port_addr,
    .wsel, .sa_en, .pre_en, .nmc_op, .fa_start
  );

  rwl_decoder #(.ROWS(ROWS), .NPORT(3), .AW(ROW_AW)) u_rwl (
    .en(rd_port_en), .addr(rd_port_addr), .rwl(rwl)
  );

  wwl_decoder #(.ROWS(ROWS), .AW(ROW_AW)) u_wwl (
    .en(wr_port_en), .addr(wr_port_addr), .wwl(wwl)
  );

  always_comb begin
    unique case (wsel)
      WSEL_HOST:   wdata = wr_data;
      WSEL_RESULT: wdata = W'(result);
      default:     wdata = nmc_wdata;
    endcase
  end

  sram_array_8t #(.ROWS(ROWS), .COLS(W)) u_array (
    .clk, .wwl, .wdata, .rwl, .rbl_cnt
  );

  logic_sa #(.COLS(W)) u_lsa (
    .sa_en, .rbl_cnt, .xor3, .maj, .data(sa_data)
  );

  nmc_regs #(.N(N)) u_nmc (
    .clk, .rst_n, .op(nmc_op),
    .xor3, .maj, .data(sa_data),
    .digit_bits, .ov_idx_q(ov_idx), .wdata(nmc_wdata),
    .sum_q, .carry_q, .mod_q, .ov_err
  );

  radix4_encoder u_enc (.bits(digit_bits), .enc(enc));

  lut_mux u_mux (.sel_ov, .enc, .ov_idx, .row(lut_row));

  final_adder #(.N(N)) u_fa (
    .clk, .rst_n, .start(fa_start),
    .sum_in(sum_q), .carry_in(carry_q), .p(mod_q),
    .result, .done(fa_done)
  );

  // Host read data: registered SA output of a one-row read.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_data <= '0;
    else if (!busy && !start && rd_en) rd_data <= sa_data;
  end

endmodule
