// bsc: logarithmic barrel shifter.
// Shifts a W-bit word by a SW-bit amount in SW stages of 1, 2, 4, ... bit
// positions. LEFT=1 shifts towards the MSB, LEFT=0 towards the LSB. Vacated
// bits are zero. For right shifts, sticky is the OR of every bit shifted out,
// which the aligners need for rounding; for left shifts it is the OR of the
// bits pushed out at the top. Amounts of W or more clear the word.
// Purely combinational.
module bsc #(
  parameter int unsigned W    = 32,
  parameter int unsigned SW   = $clog2(W + 1),
  parameter bit          LEFT = 1'b1
) (
  input  logic [W-1:0]  in,
  input  logic [SW-1:0] sh,
  output logic [W-1:0]  out,
  output logic          sticky
);
  always_comb begin
    logic [2*W-1:0] ext;
    ext    = '0;
    out    = in;
    sticky = 1'b0;
    for (int i = 0; i < SW; i++) begin
      if (sh[i]) begin
        if ((1 << i) >= W) begin
          sticky = sticky | (|out);
          out    = '0;
        end else if (LEFT) begin
          ext    = {{W{1'b0}}, out} << (1 << i);
          sticky = sticky | (|ext[2*W-1:W]);
          out    = ext[W-1:0];
        end else begin
          ext    = {out, {W{1'b0}}} >> (1 << i);
          sticky = sticky | (|ext[W-1:0]);
          out    = ext[2*W-1:W];
        end
      end
    end
  end
endmodule
