// rwl_decoder -- read wordline decoders and drivers.
//
// The read side of the array has several decoders because a logic read opens
// three rows at once (sum, carry and one look-up-table row) while an ordinary
// read opens one. Each of the NPORT row addresses, when its enable is high, is
// decoded to a one-hot vector; the vectors are OR-ed onto the read wordlines.
// Using three independent decoders is this design's choice; the paper names
// the block but does not describe it.
//
// Interface and timing: combinational. Addresses at or above ROWS select
// nothing. Two enabled ports naming the same row open that row once.
module rwl_decoder #(
  parameter int unsigned ROWS  = 64,
  parameter int unsigned NPORT = 3,
  parameter int unsigned AW    = $clog2(ROWS)
) (
  input  logic [NPORT-1:0]         en,
  input  logic [NPORT-1:0][AW-1:0] addr,
  output logic [ROWS-1:0]          rwl
);

  always_comb begin
    rwl = '0;
    for (int p = 0; p < NPORT; p++) begin
      for (int r = 0; r < ROWS; r++) begin
        if (en[p] && addr[p] == AW'(r)) rwl[r] = 1'b1;
      end
    end
  end

endmodule
