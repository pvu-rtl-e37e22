// pvu_insn_dec: decoder of the custom posit vector instructions.
// The instructions use the RISC-V vector OPFVV layout
// funct6 | vm | vs2 | vs1 | funct3 | vd | opcode. A posit instruction has
// opcode 1010111, funct6 = 001101 and vm = 1; funct3 picks the operation
// (000 vpadd, 001 vpsub, 010 vpmul, 011 vpdiv, 100 vpdot). Any other word,
// or funct3 above 100, is not a posit instruction (legal = 0).
// Register fields are passed out for the host core's vector register file.
// Combinational.
module pvu_insn_dec
  import pvu_pkg::*;
(
  input  logic [31:0] insn,
  output logic        legal,
  output pvu_op_e     op,
  output logic [4:0]  vs1,
  output logic [4:0]  vs2,
  output logic [4:0]  vd
);
  logic [2:0] f3;
  assign f3    = insn[14:12];
  assign vs2   = insn[24:20];
  assign vs1   = insn[19:15];
  assign vd    = insn[11:7];
  assign legal = (insn[6:0] == OPCODE_OPV) && (insn[31:26] == FUNCT6_POSIT) &&
                 insn[25] && (f3 <= 3'b100);
  always_comb begin
    unique case (f3)
      3'b000:  op = OP_ADD;
      3'b001:  op = OP_SUB;
      3'b010:  op = OP_MUL;
      3'b011:  op = OP_DIV;
      default: op = OP_DOT;
    endcase
  end
endmodule
