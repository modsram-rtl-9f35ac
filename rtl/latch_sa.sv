// latch_sa -- behavioural model of a voltage latch-type sense amplifier.
//
// This is a behavioural model of an analog circuit. The real part is a
// conventional latch-type SA: a cross-coupled inverter pair with an input
// differential pair and a tail transistor switched by SA_EN; while SA_EN is
// low the outputs are held at VDD, and when SA_EN rises the pair regenerates
// to complementary levels decided by Vinp against Vinn.
//
// In this model the two inputs are not voltages but discretised levels: vinp
// is the RBL level given as the number of cells that discharged it, vinn the
// reference given on the same scale. Voutp is 1 when the bitline has dropped
// at least as far as the reference (vinp >= vinn); voutn is its complement.
// With sa_en low both outputs are 1, the precharged state. The model is
// combinational; the port names follow the transistor-level drawing, the
// level scale and the polarity are this design's choices.
module latch_sa #(
  parameter int unsigned LW = 2
) (
  input  logic          sa_en,
  input  logic [LW-1:0] vinp,
  input  logic [LW-1:0] vinn,
  output logic          voutp,
  output logic          voutn
);

  always_comb begin
    if (!sa_en) begin
      voutp = 1'b1;
      voutn = 1'b1;
    end else begin
      voutp = (vinp >= vinn);
      voutn = !(vinp >= vinn);
    end
  end

endmodule
