// gen_prod: radix-4 Booth partial-product generator.
// Selects 0, X or 2X of the WA-bit multiplicand from the recoder's controls
// and inverts it for a negative digit (the +1 that completes the negation is
// added by the caller as a separate row). The result is a (WA+2)-bit two's
// complement word to be sign-extended. Combinational.
module gen_prod #(
  parameter int unsigned WA = 28
) (
  input  logic [WA-1:0] x,
  input  logic          neg,
  input  logic          zero,
  input  logic          one,
  input  logic          two,
  output logic [WA+1:0] pp
);
  logic [WA:0] mag;
  always_comb begin
    if (zero)     mag = '0;
    else if (two) mag = {x, 1'b0};
    else if (one) mag = {1'b0, x};
    else          mag = '0;
    pp = neg ? {1'b1, ~mag} : {1'b0, mag};
  end
endmodule
