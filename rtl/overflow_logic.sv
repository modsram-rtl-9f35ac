// overflow_logic -- combinational logic that forms the carry-overflow index.
//
// Sum and carry live in (n+1)-bit rows. Multiplying them by four for the next
// radix-4 step pushes bits out of the top: two from sum (written back <<2)
// and three from carry (written back <<3, one extra because a carry word is
// worth twice its bits). The radix-4 carry-save step pushes out one more, the
// MSB of its MAJ word when that is shifted left by one. All these bits carry
// the weight 2^(n+1) times a small integer; adding them gives the index k of
// the LUT-overflow row that holds k*2^(n+1) mod p:
//   ov_idx = ov_sum + ov_carry + msb
// ov_sum and ov_carry are read as binary numbers of weight 1 per unit of
// 2^(n+1). The paper's table has eight entries (k = 0..7) and its algorithm
// lets the carry lose its top bit; keeping that bit makes k = 8 reachable in
// about one product in a hundred at 256 bits, so the table here has nine
// entries, and ov_range_err flags any k above the table, which never occurs
// in simulation.
//
// Interface and timing: combinational.
module overflow_logic #(
  parameter int unsigned OV_ENTRIES = 9
) (
  input  logic [1:0] ov_sum,
  input  logic [2:0] ov_carry,
  input  logic       msb,
  output logic [3:0] ov_idx,
  output logic       ov_range_err
);

  always_comb begin
    ov_idx       = 4'(ov_sum) + 4'(ov_carry) + 4'(msb);
    ov_range_err = (32'(ov_idx) >= OV_ENTRIES);
  end

endmodule
