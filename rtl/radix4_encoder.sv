// radix4_encoder -- radix-4 Booth encoder.
//
// Looks at three overlapping multiplier bits (a_{i+1}, a_i, a_{i-1}) and
// returns the Booth digit in {0, +1, +2, -2, -1} that the two bits a_{i+1}a_i
// stand for, so that each iteration of the multiplier consumes two bits. The
// truth table is the standard radix-4 Booth table used by the paper:
//   000 -> 0   001 -> +1  010 -> +1  011 -> +2
//   100 -> -2  101 -> -1  110 -> -1  111 -> 0
// The digit code (enc_t) doubles as the row offset of that digit inside
// LUT-radix4; the code values are this design's choice.
//
// Interface and timing: combinational.
module radix4_encoder
  import modsram_pkg::*;
(
  input  logic [2:0] bits,
  output enc_t       enc
);

  always_comb begin
    unique case (bits)
      3'b000:  enc = ENC_ZERO;
      3'b001:  enc = ENC_P1;
      3'b010:  enc = ENC_P1;
      3'b011:  enc = ENC_P2;
      3'b100:  enc = ENC_M2;
      3'b101:  enc = ENC_M1;
      3'b110:  enc = ENC_M1;
      default: enc = ENC_ZERO;  // 3'b111
    endcase
  end

endmodule
