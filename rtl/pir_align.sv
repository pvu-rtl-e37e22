// pir_align: exponent alignment of NUM PIR mantissas to their largest exponent.
// A comparator chain finds the largest exponent among the non-zero elements;
// each mantissa (WI bits) is widened by WO-WI guard bits and shifted right by
// its distance to that maximum in a barrel shifter. The distance is clamped to
// the aligned width WO (the configured alignment width): a mantissa further
// away than that is shifted out completely. Bits shifted out are ORed into
// the LSB of the aligned word (sticky jamming) so later rounding still sees
// them. Zero elements give zero. The same module aligns the two operands of
// add/sub (NUM=2) and all products of the dot product (NUM=LANES).
// Combinational.
module pir_align #(
  parameter int unsigned NUM = 2,
  parameter int unsigned XW  = 10,
  parameter int unsigned WI  = 28,
  parameter int unsigned WO  = 32
) (
  input  logic [NUM-1:0]          zero,
  input  logic [NUM-1:0][XW-1:0]  exp,
  input  logic [NUM-1:0][WI-1:0]  mant,
  output logic signed [XW-1:0]    emax,
  output logic [NUM-1:0][WO-1:0]  aligned
);
  localparam int unsigned SW = $clog2(WO + 1);

  always_comb begin
    logic found;
    found = 1'b0;
    emax  = '0;
    for (int i = 0; i < NUM; i++) begin
      if (!zero[i] && (!found || ($signed(exp[i]) > emax))) begin
        emax  = $signed(exp[i]);
        found = 1'b1;
      end
    end
  end

  for (genvar i = 0; i < NUM; i++) begin : g_el
    logic [XW:0]   diff;
    logic [SW-1:0] sh;
    logic [WO-1:0] shifted;
    logic          st;
    assign diff = {emax[XW-1], emax} - {exp[i][XW-1], exp[i]};
    assign sh   = (diff > (XW+1)'(WO)) ? SW'(WO) : SW'(diff);
    bsc #(.W(WO), .SW(SW), .LEFT(1'b0)) u_sh (
      .in({mant[i], {(WO-WI){1'b0}}}), .sh(sh), .out(shifted), .sticky(st));
    assign aligned[i] = zero[i] ? '0 : (shifted | WO'(st));
  end
endmodule
