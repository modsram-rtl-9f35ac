// logic_sa -- logic sense-amplifier block: XOR3 and MAJ of three opened rows.
//
// When three read wordlines are open, each read bitline settles at one of
// four levels, set by how many of the three cells hold 1. Every bitline has
// three sense amplifiers (latch_sa) comparing it against three references:
// SA1 fires for at least one 1, SA2 for at least two, SA3 for all three. SA2
// is the majority MAJ, the carry of a full adder. SA2 also steers a pair of
// pass devices: when it is low the output XOR3 takes SA1, when it is high it
// takes SA3, which gives the three-input parity, the sum of a full adder.
// This arrangement (three SAs, two pass devices, outputs XOR3 and MAJ) is the
// published logic-SA circuit the design reuses; the assignment of the three
// references to the thresholds 1, 2, 3 is this design's reading of it.
//
// With a single open row SA1 equals the stored bit; it is brought out as
// 'data' for ordinary reads. With sa_en low the SAs sit precharged and all
// outputs are forced low here so that nothing downstream sees a stale value.
//
// The complementary outputs of the latches (voutn) are left unconnected:
// the selection uses only the true outputs, so lint reports them unused.
//
// Interface and timing: purely combinational, from rbl_cnt (one 2-bit level
// per column) to xor3, maj and data, one bit per column.
module logic_sa #(
  parameter int unsigned COLS = 257
) (
  input  logic                 sa_en,
  input  logic [COLS-1:0][1:0] rbl_cnt,
  output logic [COLS-1:0]      xor3,
  output logic [COLS-1:0]      maj,
  output logic [COLS-1:0]      data
);

  for (genvar c = 0; c < COLS; c++) begin : g_col
    logic sa1_p, sa2_p, sa3_p;
    logic sa1_n, sa2_n, sa3_n;

    latch_sa #(.LW(2)) u_sa1 (.sa_en(sa_en), .vinp(rbl_cnt[c]), .vinn(2'd1), .voutp(sa1_p), .voutn(sa1_n));
    latch_sa #(.LW(2)) u_sa2 (.sa_en(sa_en), .vinp(rbl_cnt[c]), .vinn(2'd2), .voutp(sa2_p), .voutn(sa2_n));
    latch_sa #(.LW(2)) u_sa3 (.sa_en(sa_en), .vinp(rbl_cnt[c]), .vinn(2'd3), .voutp(sa3_p), .voutn(sa3_n));

    // Pass-device selection steered by the middle SA.
    assign maj[c]  = sa_en & sa2_p;
    assign xor3[c] = sa_en & (sa2_p ? sa3_p : sa1_p);
    assign data[c] = sa_en & sa1_p;
  end

endmodule
