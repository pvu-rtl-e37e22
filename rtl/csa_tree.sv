// csa_tree: carry-save reduction of NIN addends to one sum and one carry word.
// Divide and conquer, written recursively: each level feeds groups of four
// rows to 4:2 compressors, a remaining group of three to a 3:2 compressor and
// passes one or two leftover rows on, then instantiates itself on the
// shorter list until two rows remain. sum+carry equals the total of the
// inputs modulo 2^W. The final carry-propagate addition is left to the
// user. Combinational; used for the Booth partial products and for the
// dot-product accumulation.
// Note: when this module is linted on its own as the top level, Verilator
// reports sum/carry as undriven and the level's rows as unused, because it
// does not follow the recursion below the top instance. Instantiated inside
// another module, and in simulation, the recursion is elaborated and the
// outputs are driven (the carry-save totals are checked by tb_csa_tree).
module csa_tree #(
  parameter int unsigned NIN = 9,
  parameter int unsigned W   = 32
) (
  input  logic [NIN-1:0][W-1:0] in,
  output logic [W-1:0]          sum,
  output logic [W-1:0]          carry
);
  if (NIN == 1) begin : g_one
    assign sum   = in[0];
    assign carry = '0;
  end else if (NIN == 2) begin : g_two
    assign sum   = in[0];
    assign carry = in[1];
  end else begin : g_level
    localparam int unsigned Q    = NIN / 4;
    localparam int unsigned R    = NIN % 4;
    localparam int unsigned NOUT = 2 * Q + ((R == 3) ? 2 : R);
    logic [NOUT-1:0][W-1:0] nxt;
    for (genvar q = 0; q < Q; q++) begin : g_c42
      csa42 #(.W(W)) u_c42 (
        .a(in[4*q]), .b(in[4*q+1]), .c(in[4*q+2]), .d(in[4*q+3]),
        .sum(nxt[2*q]), .carry(nxt[2*q+1]));
    end
    if (R == 3) begin : g_c32
      csa32 #(.W(W)) u_c32 (
        .a(in[4*Q]), .b(in[4*Q+1]), .c(in[4*Q+2]),
        .sum(nxt[2*Q]), .carry(nxt[2*Q+1]));
    end else begin : g_pass
      for (genvar r = 0; r < R; r++) begin : g_row
        assign nxt[2*Q+r] = in[4*Q+r];
      end
    end
    csa_tree #(.NIN(NOUT), .W(W)) u_next (.in(nxt), .sum(sum), .carry(carry));
  end
endmodule
