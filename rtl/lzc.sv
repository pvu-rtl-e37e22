// lzc: leading zero counter.
// Counts the zeros above the most significant set bit of a W-bit word and
// flags a word that is all zeros (the count is then W). Used by the posit
// decoder to measure the regime run and by the normaliser to find the
// leading one. Purely combinational; a priority scan written as a loop,
// the simplest circuit that gives the count.
module lzc #(
  parameter int unsigned W  = 31,
  parameter int unsigned CW = $clog2(W + 1)
) (
  input  logic [W-1:0]  in,
  output logic [CW-1:0] cnt,
  output logic          all_zero
);
  always_comb begin
    cnt = CW'(W);
    for (int i = 0; i < W; i++) begin
      if (in[i]) cnt = CW'(W - 1 - i);
    end
  end
  assign all_zero = (in == '0);
endmodule
