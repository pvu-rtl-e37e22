// pvu_addsub: vector posit addition and subtraction on decoded operands (PIR).
// Per lane: the two mantissas are aligned to the larger exponent (pir_align,
// AW = F+G bits, G guard bits, shifted-out bits jammed into the LSB). For a
// subtraction the sign of the second operand is flipped. Equal signs add the
// magnitudes; different signs subtract the second from the first, and a borrow
// out means the result is negative, so the difference is negated and the
// second operand's sign is taken. The result exponent is the alignment target.
// Output format shared by all vector units: mantissa of MW bits with two
// integer bits (value = mant * 2^(exp-MW+2)), exponent of RXW bits, and a
// sticky bit (always 0 here, the sticky is already jammed into the LSB).
// NaR in, NaR out; an exactly zero sum is flagged as zero. Combinational.
// The sum (AW+1 bits) must fit the shared MW-bit mantissa, so F > G is
// required (true for posit<32,2> and posit<16,2> with G = 4; posit<8,2>
// needs G <= 3). An elaboration check reports a violation.
module pvu_addsub #(
  parameter int unsigned LANES = 4,
  parameter int unsigned F     = 28,
  parameter int unsigned XW    = 10,
  parameter int unsigned G     = 4,
  parameter int unsigned MW    = 2 * F,
  parameter int unsigned RXW   = XW + 2
) (
  input  logic                      sub,
  input  logic [LANES-1:0]          a_sign, a_zero, a_nar,
  input  logic [LANES-1:0][XW-1:0]  a_exp,
  input  logic [LANES-1:0][F-1:0]   a_frac,
  input  logic [LANES-1:0]          b_sign, b_zero, b_nar,
  input  logic [LANES-1:0][XW-1:0]  b_exp,
  input  logic [LANES-1:0][F-1:0]   b_frac,
  output logic [LANES-1:0]          r_sign, r_zero, r_nar, r_sticky,
  output logic [LANES-1:0][RXW-1:0] r_exp,
  output logic [LANES-1:0][MW-1:0]  r_mant
);
  localparam int unsigned AW = F + G;

  if (MW < AW + 1) begin : g_check
    $error("pvu_addsub: MW must be at least F+G+1");
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic signed [XW-1:0] emax;
    logic [1:0][AW-1:0]   al;
    logic                 sb;
    logic [AW:0]          mag;
    logic                 sgn;

    pir_align #(.NUM(2), .XW(XW), .WI(F), .WO(AW)) u_align (
      .zero({b_zero[l], a_zero[l]}),
      .exp ({b_exp[l],  a_exp[l]}),
      .mant({b_frac[l], a_frac[l]}),
      .emax(emax), .aligned(al));

    assign sb = b_sign[l] ^ sub;

    always_comb begin
      logic [AW:0] d;
      d = '0;
      if (a_sign[l] == sb) begin
        mag = {1'b0, al[0]} + {1'b0, al[1]};
        sgn = a_sign[l];
      end else begin
        d = {1'b0, al[0]} - {1'b0, al[1]};
        if (d[AW]) begin            // borrow: |b| > |a|
          mag = -d;
          sgn = sb;
        end else begin
          mag = d;
          sgn = a_sign[l];
        end
      end
    end

    assign r_nar[l]    = a_nar[l] | b_nar[l];
    assign r_zero[l]   = !r_nar[l] && (mag == '0);
    assign r_sign[l]   = sgn && !r_zero[l];
    assign r_exp[l]    = RXW'(emax);
    assign r_mant[l]   = {mag, {(MW-AW-1){1'b0}}};
    assign r_sticky[l] = 1'b0;
  end
endmodule
