// wwl_decoder -- write wordline decoder and driver.
//
// Decodes a row address into a one-hot write wordline when en is high; all
// wordlines stay low otherwise. A plain binary decoder; the paper names the
// block without describing its insides.
//
// Interface and timing: combinational; addresses at or above ROWS select
// nothing.
module wwl_decoder #(
  parameter int unsigned ROWS = 64,
  parameter int unsigned AW   = $clog2(ROWS)
) (
  input  logic          en,
  input  logic [AW-1:0] addr,
  output logic [ROWS-1:0] wwl
);

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      wwl[r] = en && (addr == AW'(r));
    end
  end

endmodule
