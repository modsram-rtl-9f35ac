// lut_mux -- selects the look-up-table wordline for the third read port.
//
// Every iteration of the multiplication opens three rows twice: sum, carry
// and a LUT row. In the first (radix-4) section the LUT row is the
// LUT-radix4 entry of the current Booth digit; in the second (overflow)
// section it is the LUT-overflow entry of the overflow index. This
// multiplexer picks between the two row addresses. The base rows of the two
// tables are parameters; their defaults follow the row map of modsram_pkg,
// which is this design's choice.
//
// Interface and timing: combinational.
module lut_mux
  import modsram_pkg::*;
#(
  parameter int unsigned R4_BASE = ROW_R4_BASE,
  parameter int unsigned OV_BASE = ROW_OV_BASE
) (
  input  logic              sel_ov,
  input  enc_t              enc,
  input  logic [3:0]        ov_idx,
  output logic [ROW_AW-1:0] row
);

  always_comb begin
    if (sel_ov) row = ROW_AW'(OV_BASE) + ROW_AW'(ov_idx);
    else        row = ROW_AW'(R4_BASE) + ROW_AW'(enc);
  end

endmodule
