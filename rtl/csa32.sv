// csa32: word-level 3:2 compressor (carry-save adder).
// Reduces three W-bit addends to a sum word and a carry word with
// a+b+c == sum+carry (mod 2^W). Each bit is a full adder; the carry word is
// the majority shifted up by one place. Combinational. The majority of the
// top bit falls off the word (modulo 2^W), so lint reports its MSB unused.
module csa32 #(
  parameter int unsigned W = 16
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  output logic [W-1:0] sum,
  output logic [W-1:0] carry
);
  logic [W-1:0] maj;
  assign sum   = a ^ b ^ c;
  assign maj   = (a & b) | (a & c) | (b & c);
  assign carry = {maj[W-2:0], 1'b0};
endmodule
