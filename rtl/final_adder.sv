// final_adder -- near-memory full addition and reduction of sum and carry.
//
// After the last iteration the product modulo p is held redundantly as a sum
// word and a carry word. This block adds them once with a full carry-
// propagating adder (the only long carry chain of the multiplication) and
// then reduces the total below p. The total is below 3*2^(n+1); the reduction
// subtracts p once per cycle while the value is at least p. For a modulus
// with its top bit set (p >= 2^(n-1)), as for the 256-bit curves the design
// targets, that is at most 12 subtractions. The paper asks only for "a full
// addition and reduction"; the one-subtraction-per-cycle form is this
// design's choice.
//
// Interface and timing: on a cycle with start high, sum_in + 2*carry_in is
// loaded (carry_in is the raw MAJ word, not yet shifted) and done falls. On
// each following cycle the accumulator loses p if it is at least p; when it
// is below p, done rises and stays high, result holding the value, until the
// next start. p must be stable from the cycle after start until done. A zero
// modulus ends the reduction at once.
module final_adder #(
  parameter int unsigned N = 256,
  parameter int unsigned W = N + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [W-1:0]  sum_in,
  input  logic [W-1:0]  carry_in,
  input  logic [N-1:0]  p,
  output logic [N-1:0]  result,
  output logic          done
);

  localparam int unsigned AW = N + 3;

  logic [AW-1:0] acc_q;
  logic          busy_q;
  logic          ge_p;

  assign ge_p = (p != '0) && (acc_q >= AW'(p));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q  <= '0;
      busy_q <= 1'b0;
      done   <= 1'b0;
    end else if (start) begin
      acc_q  <= AW'(sum_in) + (AW'(carry_in) << 1);
      busy_q <= 1'b1;
      done   <= 1'b0;
    end else if (busy_q) begin
      if (ge_p) begin
        acc_q <= acc_q - AW'(p);
      end else begin
        busy_q <= 1'b0;
        done   <= 1'b1;
      end
    end
  end

  assign result = acc_q[N-1:0];

endmodule
