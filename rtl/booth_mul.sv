// booth_mul: unsigned WA x WB radix-4 Booth multiplier, carry-save output.
// The multiplier b is padded with a zero below and zeros above and cut into
// WB/2+1 overlapping 3-bit groups; each group is recoded (booth_enc) and
// selects a partial product of the multiplicand a (gen_prod), shifted by
// two places per group. One more row collects the +1 of every negated
// partial product. All rows are reduced by a CSA tree of 4:2 and 3:2
// compressors to a sum and a carry word of PW = WA+WB+2 bits; sum+carry,
// truncated to WA+WB bits, is the product a*b. The final addition is done by
// the caller. Combinational.
module booth_mul #(
  parameter int unsigned WA = 28,
  parameter int unsigned WB = 28,
  parameter int unsigned PW = WA + WB + 2
) (
  input  logic [WA-1:0] a,
  input  logic [WB-1:0] b,
  output logic [PW-1:0] sum,
  output logic [PW-1:0] carry
);
  localparam int unsigned NG = WB / 2 + 1;      // Booth groups
  localparam int unsigned YW = 2 * NG + 1;      // padded multiplier width

  logic [YW-1:0]          y;
  logic [NG:0][PW-1:0]    rows;
  logic [NG-1:0]          negs;

  assign y = {{(YW-WB-1){1'b0}}, b, 1'b0};

  for (genvar i = 0; i < NG; i++) begin : g_grp
    logic n, z, o, t;
    logic [WA+1:0] pp;
    booth_enc u_enc (.bits(y[2*i+2 -: 3]), .neg(n), .zero(z), .one(o), .two(t));
    gen_prod #(.WA(WA)) u_gen (.x(a), .neg(n), .zero(z), .one(o), .two(t), .pp(pp));
    assign negs[i] = n;
    assign rows[i] = PW'({{PW{pp[WA+1]}}, pp} << (2*i));
  end

  logic [PW-1:0] negrow;
  always_comb begin
    negrow = '0;
    for (int i = 0; i < NG; i++) negrow[2*i] = negs[i];
  end
  assign rows[NG] = negrow;

  csa_tree #(.NIN(NG+1), .W(PW)) u_tree (.in(rows), .sum(sum), .carry(carry));
endmodule
