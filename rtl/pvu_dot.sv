// pvu_dot: dot-product accumulation of the LANES products of pvu_mul.
// The exact 2F-bit products (two integer bits) are aligned together to the
// largest product exponent by pir_align, widened by G guard bits
// (shifted-out bits jammed into the LSB). Each aligned mantissa is turned into
// two's complement by its sign, all terms are added by the carry-save tree
// (csa_tree) in a word of TW = 2F+G+clog2(LANES)+1 bits and the sum and carry
// are added once. The sign of the total gives the result sign, its magnitude
// is the scalar result: mantissa of TW-1 bits with 2+clog2(LANES) integer
// bits, exponent = the alignment target. Nothing is rounded until the final
// encoding. A NaR product gives NaR. Combinational.
module pvu_dot #(
  parameter int unsigned LANES = 4,
  parameter int unsigned F     = 28,
  parameter int unsigned RXW   = 12,
  parameter int unsigned G     = 4,
  parameter int unsigned TW    = 2 * F + G + $clog2(LANES) + 1
) (
  input  logic [LANES-1:0]          p_sign, p_zero, p_nar,
  input  logic [LANES-1:0][RXW-1:0] p_exp,
  input  logic [LANES-1:0][2*F-1:0] p_mant,
  output logic                      r_sign, r_zero, r_nar, r_sticky,
  output logic [RXW-1:0]            r_exp,
  output logic [TW-2:0]             r_mant
);
  localparam int unsigned DW = 2 * F + G;

  logic signed [RXW-1:0]      emax;
  logic [LANES-1:0][DW-1:0]   al;
  logic [LANES-1:0][TW-1:0]   terms;
  logic [TW-1:0]              s, c, total, mag;

  pir_align #(.NUM(LANES), .XW(RXW), .WI(2*F), .WO(DW)) u_align (
    .zero(p_zero), .exp(p_exp), .mant(p_mant), .emax(emax), .aligned(al));

  for (genvar l = 0; l < LANES; l++) begin : g_tc
    assign terms[l] = p_sign[l] ? -TW'(al[l]) : TW'(al[l]);
  end

  csa_tree #(.NIN(LANES), .W(TW)) u_acc (.in(terms), .sum(s), .carry(c));
  assign total = s + c;
  assign mag   = total[TW-1] ? -total : total;

  assign r_nar    = |p_nar;
  assign r_zero   = !r_nar && (total == '0);
  assign r_sign   = total[TW-1] && !r_zero;
  assign r_exp    = emax;
  assign r_mant   = mag[TW-2:0];
  assign r_sticky = 1'b0;
  wire unused = mag[TW-1];
endmodule
