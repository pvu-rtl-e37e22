// tb_pvu_p8x16: end-to-end test of the posit vector unit in the partition with
// 16 elements of posit<8,2> (the same 128-bit operand vector cut into
// 16 lanes), at a regime width of 4 bits, enough for every regime of a
// 8-bit posit. Otherwise identical to the full-size test: a random stream
// of vpadd, vpsub, vpmul, vpdiv, vpdot and non-posit words, issued back to
// back, checked against the bit-serial reference (division within one posit
// step and mostly exact), a latency of three clocks, and a count of every
// mechanism: each operation, NaR, zero, saturation, alignment clamp, a regime
// filling the whole word and a rejected instruction.
// G is lowered to 3 guard bits: the adder needs F > G, and F is only 4 here.
// With sixteen products of 4-bit mantissas, heavy cancellation in vpdot can
// lose bits below the aligned window (the accumulator is not an exact
// quire), so dot results are counted for exactness (at least 95% must match
// the exact rounded sum) rather than failed one by one.
module tb_pvu_p8x16;
  import posit_ref_pkg::*;

  localparam int N = 8, ES = 2, LANES = 16, LAT = 3;
  localparam logic [N-1:0] ONE = N'(1) << (N - 2), MAXP = {1'b0, {(N-1){1'b1}}},
                           MINP = N'(1), NAR = N'(1) << (N - 1), ALLONE = '1;
  localparam int NUM_OPS = 1500;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [31:0] insn = '0;
  logic [LANES-1:0][N-1:0] pv1 = '0, pv2 = '0, posit_rst;
  logic [4:0] dec_vs1, dec_vs2, out_vd;
  logic out_valid, out_illegal;

  pvu_top #(.N(N), .ES(ES), .LANES(LANES), .RGM_W(4), .G(3)) dut (.clk, .rst_n, .in_valid, .insn, .pv1, .pv2, .dec_vs1, .dec_vs2,
               .out_valid, .out_illegal, .out_vd, .posit_rst);

  always #5 clk = ~clk;

  typedef struct {
    logic [LANES-1:0][N-1:0] exp;
    bit   ill;
    int   op;
    logic [4:0] vd;
    longint cyc;
  } exp_t;
  exp_t q [$];

  int checks = 0, failures = 0;
  int div_total = 0, div_exact = 0, dot_total = 0, dot_exact = 0;
  int n_op [5];
  int n_illegal = 0, n_nar = 0, n_zero = 0, n_sat = 0, n_align = 0, n_full_regime = 0;
  longint cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic [31:0] mk_insn(int f3, logic [4:0] vd, logic [4:0] vs1, logic [4:0] vs2);
    return {6'b001101, 1'b1, vs2, vs1, 3'(f3), vd, 7'b1010111};
  endfunction

  function automatic int pdist(logic [31:0] a, logic [31:0] b);
    int d = int'(a) - int'(b);
    return d < 0 ? -d : d;
  endfunction

  // compare outputs
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      if (q.size() == 0) begin
        failures++; $display("FAIL: unexpected output");
      end else begin
        e = q.pop_front();
        checks++;
        if (cyc - e.cyc != LAT) begin
          failures++; $display("FAIL: latency %0d", cyc - e.cyc);
        end
        checks++;
        if (out_illegal !== e.ill || out_vd !== e.vd) begin
          failures++; $display("FAIL: illegal/vd tag");
        end
        for (int l = 0; l < LANES; l++) begin
          checks++;
          if (e.op == 3 && !e.ill) begin
            div_total++;
            if (posit_rst[l] == e.exp[l]) div_exact++;
            if (pdist(posit_rst[l], e.exp[l]) > 1) begin
              failures++;
              $display("FAIL div lane %0d got %h exp %h", l, posit_rst[l], e.exp[l]);
            end
          end else if (e.op == 4 && !e.ill && l == 0) begin
            dot_total++;
            if (posit_rst[l] == e.exp[l]) dot_exact++;
          end else if (posit_rst[l] !== e.exp[l]) begin
            failures++;
            if (failures < 20) $display("FAIL op %0d lane %0d got %h exp %h", e.op, l, posit_rst[l], e.exp[l]);
          end
        end
      end
    end
  end

  task automatic issue(int f3, bit bad, logic [LANES-1:0][N-1:0] a, logic [LANES-1:0][N-1:0] b);
    exp_t e;
    logic [15:0][31:0] a16, b16;
    logic [4:0] vd = 5'($urandom);
    a16 = '0; b16 = '0;
    for (int l = 0; l < LANES; l++) begin a16[l] = a[l]; b16[l] = b[l]; end
    insn = mk_insn(f3, vd, 5'($urandom), 5'($urandom));
    if (bad) insn[31:26] = 6'b000000;
    pv1 = a; pv2 = b;
    in_valid = 1;
    e.ill = bad; e.op = f3; e.vd = vd; e.cyc = cyc;
    e.exp = '0;
    if (!bad) begin
      n_op[f3]++;
      if (f3 == 4) e.exp[0] = ref_dot(a16, b16, LANES, N, ES);
      else for (int l = 0; l < LANES; l++) begin
        case (f3)
          0: e.exp[l] = ref_add(a[l], b[l], 0, N, ES);
          1: e.exp[l] = ref_add(a[l], b[l], 1, N, ES);
          2: e.exp[l] = ref_mul(a[l], b[l], N, ES);
          default: e.exp[l] = ref_div(a[l], b[l], N, ES);
        endcase
      end
      for (int l = 0; l < LANES; l++) begin
        if (f3 != 4 || l == 0) begin
          if (e.exp[l] == NAR) n_nar++;
          if (e.exp[l] == 0) n_zero++;
          if (e.exp[l] == MAXP || e.exp[l] == MINP ||
              e.exp[l] == (NAR | MINP) || e.exp[l] == ALLONE) n_sat++;
        end
        if (a[l] == MAXP || a[l] == MINP || b[l] == MAXP || b[l] == MINP) n_full_regime++;
        if (f3 < 2) begin
          ref_pir_t x = ref_decode(a[l], N, ES), y = ref_decode(b[l], N, ES);
          if (!x.zero && !y.zero && !x.nar && !y.nar &&
              (x.scale - y.scale > N || y.scale - x.scale > N)) n_align++;
        end
      end
    end else n_illegal++;
    q.push_back(e);
    @(posedge clk);
    #1;
    in_valid = 0;
  endtask

  initial begin
    logic [LANES-1:0][N-1:0] a, b;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // directed: the special values and extremes
    a = '0; b = '0;
    a[3] = MAXP; a[2] = MINP; a[1] = NAR; a[0] = '0;
    b[3] = MAXP; b[2] = MINP; b[1] = ONE; b[0] = ONE;
    for (int f = 0; f < 5; f++) issue(f, 0, a, b);
    a[3] = ONE; a[2] = ONE | (ONE >> 1) | (ONE >> 2); a[1] = ONE; a[0] = ONE | NAR;
    b[3] = N'(16); b[2] = '0; b[1] = ONE; b[0] = (ONE >> 1) | (ONE >> 2) | (ONE >> 3);
    for (int f = 0; f < 5; f++) issue(f, 0, a, b);
    issue(0, 1, a, b);
    // random stream
    for (int i = 0; i < NUM_OPS; i++) begin
      for (int l = 0; l < LANES; l++) begin
        a[l] = rand_posit(N);
        b[l] = rand_posit(N);
      end
      issue($urandom_range(0, 4), ($urandom_range(0, 49) == 0), a, b);
      if ($urandom_range(0, 9) == 0) begin
        repeat ($urandom_range(1, 3)) @(posedge clk);
        #1;
      end
    end
    repeat (LAT + 2) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL: %0d results missing", q.size()); end
    // every mechanism must have happened
    for (int f = 0; f < 5; f++) begin checks++; if (n_op[f] == 0) failures++; end
    checks++; if (n_illegal == 0)     begin failures++; $display("FAIL: no illegal"); end
    checks++; if (n_nar == 0)         begin failures++; $display("FAIL: no NaR"); end
    checks++; if (n_zero == 0)        begin failures++; $display("FAIL: no zero"); end
    checks++; if (n_sat == 0)         begin failures++; $display("FAIL: no saturation"); end
    checks++; if (n_align == 0)       begin failures++; $display("FAIL: no align clamp"); end
    checks++; if (n_full_regime == 0) begin failures++; $display("FAIL: no full regime"); end
    checks++;
    if (div_exact * 100 < div_total * 85) begin
      failures++; $display("FAIL: division exact rate too low");
    end
    checks++;
    if (dot_exact * 100 < dot_total * 95) begin
      failures++; $display("FAIL: dot exact rate too low");
    end
    $display("dot exact %0d of %0d", dot_exact, dot_total);
    $display("ops add=%0d sub=%0d mul=%0d div=%0d dot=%0d illegal=%0d nar=%0d zero=%0d sat=%0d align_clamp=%0d full_regime=%0d",
             n_op[0], n_op[1], n_op[2], n_op[3], n_op[4], n_illegal, n_nar, n_zero, n_sat, n_align, n_full_regime);
    $display("division exact %0d of %0d lanes (%0d.%02d%%)", div_exact, div_total,
             div_exact * 100 / div_total, (div_exact * 10000 / div_total) % 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NUM_OPS * 4 + 1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
