// pvu_pkg: constants shared by the posit vector unit.
// Holds the operation codes of the vector unit and the fields of the custom
// RISC-V vector instruction that selects them. The operation code is the
// instruction's funct3 field (000 add, 001 sub, 010 mul, 011 div, 100 dot),
// the major opcode is the OP-V value 1010111 and funct6 is the custom value
// 001101, all as in the instruction table of the design. Pure constants, no
// timing.
package pvu_pkg;

  typedef enum logic [2:0] {
    OP_ADD = 3'b000,
    OP_SUB = 3'b001,
    OP_MUL = 3'b010,
    OP_DIV = 3'b011,
    OP_DOT = 3'b100
  } pvu_op_e;

  localparam logic [6:0] OPCODE_OPV   = 7'b1010111;
  localparam logic [5:0] FUNCT6_POSIT = 6'b001101;

endpackage
