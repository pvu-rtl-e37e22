// csa42: word-level 4:2 compressor.
// Reduces four W-bit addends to a sum and a carry word with
// a+b+c+d == sum+carry (mod 2^W), built as two chained 3:2 stages so no
// carry ripples along the word. Combinational.
module csa42 #(
  parameter int unsigned W = 16
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  input  logic [W-1:0] d,
  output logic [W-1:0] sum,
  output logic [W-1:0] carry
);
  logic [W-1:0] s1, c1;
  csa32 #(.W(W)) u_l1 (.a(a),  .b(b),  .c(c), .sum(s1),  .carry(c1));
  csa32 #(.W(W)) u_l2 (.a(s1), .b(c1), .c(d), .sum(sum), .carry(carry));
endmodule
