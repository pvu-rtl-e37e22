// posit_decode: one posit<N,ES> word to the posit intermediate representation
// (PIR): sign, unified binary exponent and mantissa with its hidden bit.
// How it works: a negative word is first turned into its magnitude (two's
// complement). The regime's first bit selects whether the regime body is
// passed straight (run of 0s) or inverted (run of 1s) to the leading-zero
// counter; the run length m gives the regime value r = m-1 (ones) or -m
// (zeros). A barrel shifter removes the run and its terminating bit, so the
// ES exponent bits and the fraction sit at the top. exp = (r << ES) | e and
// frac = {1, fraction bits}. All zeros is zero, 1 followed by zeros is NaR
// (the 2022 posit standard encoding). Purely combinational. The magnitude's
// top bit is 0 for every word except NaR, which is flagged separately, so it
// is not used (lint notes it as an unused bit).
// Widths: F = N-ES-2 mantissa bits including the hidden one (28 for
// posit<32,2>), XW = RGM_W+ES exponent bits (RGM_W is the regime field width).
module posit_decode #(
  parameter int unsigned N     = 32,
  parameter int unsigned ES    = 2,
  parameter int unsigned RGM_W = 8,
  parameter int unsigned F     = N - ES - 2,
  parameter int unsigned XW    = RGM_W + ES
) (
  input  logic                 [N-1:0]  p,
  output logic                          zero,
  output logic                          nar,
  output logic                          sign,
  output logic signed          [XW-1:0] exp,
  output logic                 [F-1:0]  frac
);
  localparam int unsigned CW = $clog2(N);       // counts 0..N-1
  localparam int unsigned SW = $clog2(N + 1);

  logic [N-1:0]   mag;
  logic [N-2:0]   body, lzc_in, shifted;
  logic [CW-1:0]  run;
  logic           all_z, rmsb, unused_st;
  logic [SW-1:0]  sh;
  logic signed [XW-1:0] r;
  logic [ES-1:0]  e;

  assign sign = p[N-1];
  assign zero = (p == '0);
  assign nar  = (p == {1'b1, {(N-1){1'b0}}});
  assign mag  = sign ? (~p + 1'b1) : p;
  assign body = mag[N-2:0];
  assign rmsb = body[N-2];
  assign lzc_in = rmsb ? ~body : body;

  lzc #(.W(N-1), .CW(CW)) u_lzc (.in(lzc_in), .cnt(run), .all_zero(all_z));

  // skip the run and its terminating bit
  assign sh = SW'(run) + SW'(1);
  bsc #(.W(N-1), .SW(SW), .LEFT(1'b1)) u_bsc (
    .in(body), .sh(sh), .out(shifted), .sticky(unused_st));

  assign r    = rmsb ? (XW'(run) - XW'(1)) : -XW'(run);
  assign e    = shifted[N-2 -: ES];
  assign exp  = (r <<< ES) | XW'(e);
  assign frac = {1'b1, shifted[N-2-ES -: F-1]};

  // all_z only means the regime fills the word; the run count covers it
  wire unused = all_z ^ unused_st ^ (|shifted[N-ES-F-1:0]);
endmodule
