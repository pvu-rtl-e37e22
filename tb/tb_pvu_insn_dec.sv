// tb_pvu_insn_dec: checks the instruction decoder on the five posit vector
// instructions (funct6 001101, vm 1, funct3 000..100, opcode 1010111) with
// random register fields, and on words that must be rejected: another
// funct6, vm = 0, another opcode, funct3 101..111.
module tb_pvu_insn_dec;
  import pvu_pkg::*;
  logic [31:0] insn;
  logic legal;
  pvu_op_e op;
  logic [4:0] vs1, vs2, vd;
  int checks = 0, failures = 0;

  pvu_insn_dec dut (.insn, .legal, .op, .vs1, .vs2, .vd);

  initial begin
    for (int t = 0; t < 2000; t++) begin
      logic [4:0] r1, r2, rd;
      int f3, kind;
      bit exp_legal;
      r1 = 5'($urandom); r2 = 5'($urandom); rd = 5'($urandom);
      f3 = $urandom_range(0, 7);
      kind = $urandom_range(0, 5);
      insn = {6'b001101, 1'b1, r2, r1, 3'(f3), rd, 7'b1010111};
      if (kind == 1) insn[31:26] = 6'($urandom_range(0, 12));
      if (kind == 2) insn[25] = 1'b0;
      if (kind == 3) insn[6:0] = 7'b0110011;
      exp_legal = (f3 <= 4) && (kind == 0 || kind > 3 || (kind == 1 && insn[31:26] == 6'b001101));
      #1;
      checks++;
      if (legal != exp_legal) begin failures++; $display("FAIL legal %h", insn); end
      checks++;
      if (vs1 != r1 || vs2 != r2 || vd != rd) begin failures++; $display("FAIL fields %h", insn); end
      if (exp_legal) begin
        checks++;
        if (int'(op) != f3) begin failures++; $display("FAIL op %h", insn); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
