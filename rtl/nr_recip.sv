// nr_recip: reciprocal of a posit mantissa by Newton's iteration.
// Input d is a mantissa 1.f in [1,2) with F-1 fraction bits; output x ~ 1/d
// in (0.5,1] as an unsigned fixed-point number with RW fraction bits.
// The start value is the linear estimate x0 = 24/17 - 8/17*d (error below
// 1/17), then ITER steps of x(n+1) = x(n)*(2 - d*x(n)) follow, each using
// two radix-4 Booth multipliers (booth_mul) and truncating back to RW
// fraction bits. Every step squares the error, so three steps reach about
// 2^-32 before truncation. The iteration is unrolled: combinational.
module nr_recip #(
  parameter int unsigned F    = 28,
  parameter int unsigned RW   = F + 4,
  parameter int unsigned ITER = 3
) (
  input  logic [F-1:0]  d,
  output logic [RW:0]   x
);
  // 24/17 and 8/17 scaled by 2^RW
  localparam logic [RW+5:0] C1W = ((RW+6)'(24) << RW) / (RW+6)'(17);
  localparam logic [RW+5:0] C2W = ((RW+6)'(8)  << RW) / (RW+6)'(17);
  localparam logic [RW:0]   C1  = C1W[RW:0];
  localparam logic [RW-1:0] C2  = C2W[RW-1:0];

  localparam int unsigned P0 = RW + F + 2;          // C2*d product width
  localparam int unsigned P1 = F + RW + 3;          // d*x product width
  localparam int unsigned P2 = 2 * RW + 5;          // x*e product width

  logic [ITER:0][RW:0] xs;

  // initial estimate
  logic [P0-1:0] s0, c0, p0;
  booth_mul #(.WA(RW), .WB(F), .PW(P0)) u_m0 (.a(C2), .b(d), .sum(s0), .carry(c0));
  assign p0    = s0 + c0;                           // Q1.(RW+F-1)
  assign xs[0] = C1 - p0[RW+F-1 -: RW+1];           // back to Q1.RW

  for (genvar i = 0; i < ITER; i++) begin : g_it
    logic [P1-1:0] s1, c1, p1;
    logic [P2-1:0] s2, c2, p2;
    logic [RW+1:0] t, e;
    booth_mul #(.WA(F), .WB(RW+1), .PW(P1)) u_dx (
      .a(d), .b(xs[i]), .sum(s1), .carry(c1));
    assign p1 = s1 + c1;                            // Q2.(F-1+RW)
    assign t  = p1[F+RW : F-1];                     // Q2.RW
    assign e  = {2'b10, {RW{1'b0}}} - t;            // 2 - d*x
    booth_mul #(.WA(RW+1), .WB(RW+2), .PW(P2)) u_xe (
      .a(xs[i]), .b(e), .sum(s2), .carry(c2));
    assign p2 = s2 + c2;                            // Q3.(2RW)
    assign xs[i+1] = p2[2*RW : RW];                 // Q1.RW
    wire unused = ^{p1[P1-1:F+RW+1], p1[F-2:0], p2[P2-1:2*RW+1], p2[RW-1:0]};
  end

  assign x = xs[ITER];
  wire unused0 = ^{p0[P0-1:RW+F], p0[F-2:0], C1W[RW+5:RW+1], C2W[RW+5:RW]};
endmodule
