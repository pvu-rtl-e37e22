// posit_encode: normalised PIR (sign, exponent, 1.f, sticky) to posit<N,ES>.
// The exponent is split into the regime value k = exp >> ES and the ES
// exponent bits e. The word {rb, ~rb, e, f} (rb = 1 for k >= 0) is shifted
// right arithmetically so the regime run rb repeats m = k+1 (k >= 0) or -k
// (k < 0) times, which builds the regime, its terminating bit, the exponent
// and the fraction in one bit string. The first N-1 bits are the posit body;
// the next bit is the guard and everything below, with the input sticky, the
// sticky. Round to nearest, ties to even, acts on that bit string, so it also
// rounds exponent bits cut off by a long regime. Scales beyond maxpos or below
// minpos saturate to them (a non-zero value never becomes zero or NaR).
// Negative results are the two's complement of the body. Combinational.
module posit_encode #(
  parameter int unsigned N  = 32,
  parameter int unsigned ES = 2,
  parameter int unsigned F  = N - ES - 2,
  parameter int unsigned XW = 13
) (
  input  logic               sign, zero, nar, sticky,
  input  logic [XW-1:0]      exp,
  input  logic [F:0]         frac,
  output logic [N-1:0]       p
);
  localparam int unsigned WV   = 2 + ES + F;
  localparam int unsigned WY   = WV + N;
  localparam int signed   MAXK = N - 2;
  localparam int unsigned SW   = $clog2(N);

  logic signed [XW-1:0] k;
  logic [ES-1:0]        e;
  logic                 rb;
  logic [SW-1:0]        msh;
  logic [WY-1:0]        y;
  logic [N-2:0]         body, body_r;
  logic                 guard, stk;

  assign k  = $signed(exp) >>> ES;
  assign e  = exp[ES-1:0];
  assign rb = !k[XW-1];
  // run length minus one: k for k >= 0, -k-1 for k < 0
  assign msh = rb ? SW'(k) : SW'(~k);
  assign y   = WY'($signed({rb, ~rb, e, frac[F-1:0], {N{1'b0}}}) >>> msh);

  always_comb begin
    if (k >= XW'(MAXK)) begin
      body  = '1;                                 // maxpos
      guard = 1'b0;
      stk   = 1'b0;
    end else if (k < -XW'(MAXK)) begin
      body  = (N-1)'(1);                          // minpos
      guard = 1'b0;
      stk   = 1'b0;
    end else begin
      body  = y[WY-1 -: N-1];
      guard = y[WY-N];
      stk   = sticky | (|y[WY-N-1:0]);
    end
    body_r = body + {{(N-2){1'b0}}, guard & (body[0] | stk)};
  end

  always_comb begin
    if (nar)       p = {1'b1, {(N-1){1'b0}}};
    else if (zero) p = '0;
    else if (sign) p = -{1'b0, body_r};
    else           p = {1'b0, body_r};
  end
  wire unused = frac[F];
endmodule
