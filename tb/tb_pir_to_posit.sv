// tb_pir_to_posit: checks the normalise/encode stage (posit<32,2>, four
// lanes): random unnormalised vector results (56-bit mantissas, two integer
// bits) and scalar results (62-bit mantissas, four integer bits) must encode
// to the reference rounding of mant * 2^(exp - fraction bits). With
// sel_scalar set, lane 0 carries the scalar and the other lanes are zero.
module tb_pir_to_posit;
  import posit_ref_pkg::*;
  localparam int L = 4, RXW = 12, MW = 56, MWS = 62;
  logic sel;
  logic [L-1:0] vs, vz, vn, vst;
  logic [L-1:0][RXW-1:0] ve;
  logic [L-1:0][MW-1:0] vm;
  logic ss, sz, sn, sst;
  logic [RXW-1:0] se;
  logic [MWS-1:0] sm;
  logic [L-1:0][31:0] r;
  int checks = 0, failures = 0;

  pir_to_posit #(.LANES(L)) dut (.sel_scalar(sel),
    .v_sign(vs), .v_zero(vz), .v_nar(vn), .v_sticky(vst), .v_exp(ve), .v_mant(vm),
    .s_sign(ss), .s_zero(sz), .s_nar(sn), .s_sticky(sst), .s_exp(se), .s_mant(sm),
    .posit_rst(r));

  initial begin
    for (int t = 0; t < 3000; t++) begin
      logic [31:0] e;
      sel = 1'($urandom);
      for (int l = 0; l < L; l++) begin
        vs[l] = 1'($urandom); vz[l] = 0; vn[l] = (t % 50 == 3); vst[l] = 1'($urandom);
        ve[l] = RXW'($urandom_range(0, 300) - 150);
        vm[l] = MW'({$urandom, $urandom}) >> $urandom_range(0, 30);
      end
      ss = 1'($urandom); sz = 0; sn = 0; sst = 0;
      se = RXW'($urandom_range(0, 300) - 150);
      sm = MWS'({$urandom, $urandom}) >> $urandom_range(0, 30);
      #1;
      if (sel) begin
        e = (sm == 0) ? 0 : ref_encode(ss, big_t'(sm), $signed(se) - (MWS - 4), 0, 32, 2);
        checks += 2;
        if (r[0] != e) begin failures++; $display("FAIL scalar got %h exp %h", r[0], e); end
        if (r[3:1] != '0) begin failures++; $display("FAIL upper lanes"); end
      end else begin
        for (int l = 0; l < L; l++) begin
          if (vn[l]) e = 32'h8000_0000;
          else if (vm[l] == 0) e = 0;
          else e = ref_encode(vs[l], big_t'(vm[l]), $signed(ve[l]) - (MW - 2), vst[l], 32, 2);
          checks++;
          if (r[l] != e) begin failures++; $display("FAIL lane %0d got %h exp %h", l, r[l], e); end
        end
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
