// booth_enc: radix-4 Booth recoder for one group of multiplier bits.
// Takes the overlapping triple {y[2i+1], y[2i], y[2i-1]} and gives the digit
// in {-2,-1,0,+1,+2} as four one-hot-ish controls: neg, zero, one, two.
// Combinational.
module booth_enc (
  input  logic [2:0] bits,
  output logic       neg,
  output logic       zero,
  output logic       one,
  output logic       two
);
  assign one  = bits[0] ^ bits[1];
  assign two  = (bits == 3'b011) || (bits == 3'b100);
  assign zero = (bits == 3'b000) || (bits == 3'b111);
  assign neg  = bits[2] && !zero;
endmodule
