// pir_norm: normalisation of an unrounded PIR result.
// Input: a mantissa of MW bits with IW integer bits, its exponent (XI bits)
// and a sticky bit. The leading-zero counter finds the first one, a barrel
// shifter moves it to the top, and the exponent is corrected by IW-1-lz so the
// value is 1.f * 2^exp. The top F+1 bits are kept (hidden bit, F-1 fraction
// bits and one extra bit) and all bits below are ORed into sticky; rounding is
// left to the encoder, which knows where the posit cuts the fraction. The same
// module serves the vector results (one per lane) and the scalar dot-product
// result. A zero mantissa gives zero. Combinational.
module pir_norm #(
  parameter int unsigned MW = 56,
  parameter int unsigned IW = 2,
  parameter int unsigned XI = 12,
  parameter int unsigned XO = XI + 1,
  parameter int unsigned F  = 28
) (
  input  logic                  sign_i, zero_i, nar_i, sticky_i,
  input  logic [XI-1:0]         exp_i,
  input  logic [MW-1:0]         mant_i,
  output logic                  sign_o, zero_o, nar_o, sticky_o,
  output logic signed [XO-1:0]  exp_o,
  output logic [F:0]            frac_o
);
  localparam int unsigned CW = $clog2(MW + 1);

  logic [CW-1:0] lz;
  logic          all_z, unused_st;
  logic [MW-1:0] shifted;

  lzc #(.W(MW), .CW(CW)) u_lzc (.in(mant_i), .cnt(lz), .all_zero(all_z));
  bsc #(.W(MW), .SW(CW), .LEFT(1'b1)) u_bsc (
    .in(mant_i), .sh(lz), .out(shifted), .sticky(unused_st));

  assign exp_o    = XO'($signed(exp_i)) + XO'(IW - 1) - XO'(lz);
  assign frac_o   = shifted[MW-1 -: F+1];
  assign sticky_o = sticky_i | (|shifted[MW-F-2:0]);
  assign nar_o    = nar_i;
  assign zero_o   = !nar_i && (zero_i || all_z);
  assign sign_o   = sign_i && !zero_o;
  wire unused = unused_st;
endmodule
