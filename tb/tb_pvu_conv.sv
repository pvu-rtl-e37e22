// tb_pvu_conv: convolution workload on the posit vector unit at its default
// size (posit<32,2>, four lanes). The testbench plays the host core: it
// holds an image and a filter in memory, loads four-element rows into the
// operand vectors, issues one PVU instruction at a time and waits for its
// result before it uses it, as a program built on the inline-assembly calls
// would. Two programs are run for every output pixel:
//   A  the row-vectorised 4x4 convolution: vpmul of an image row with a
//      filter row, the four products summed with vpadd (two lanes at once,
//      then one), and the row sum added to the running pixel sum with vpadd;
//   B  the same with vpdot for the row product and one vpadd per row.
// A 7x7 filter (the kernel size of the first layer of ResNet-18) is run the
// same way, each row split into a four-element and a zero-padded
// three-element vector. Each pixel is compared with the same sequence of
// operations evaluated by the bit-serial reference, which rounds once per
// operation as the unit must. Image values are non-negative activations
// below 1, filter weights signed and below 1/4. The latency of every
// instruction is checked to be three clocks.
module tb_pvu_conv;
  import posit_ref_pkg::*;

  localparam int N = 32, ES = 2, LANES = 4, LAT = 3;
  localparam int OUT = 4;                   // output pixels per side
  localparam int MAXK = 7, IMG = OUT + MAXK - 1;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [31:0] insn = '0;
  logic [LANES-1:0][N-1:0] pv1 = '0, pv2 = '0, posit_rst;
  logic [4:0] dec_vs1, dec_vs2, out_vd;
  logic out_valid, out_illegal;

  pvu_top dut (.clk, .rst_n, .in_valid, .insn, .pv1, .pv2, .dec_vs1, .dec_vs2,
               .out_valid, .out_illegal, .out_vd, .posit_rst);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_instr = 0;
  logic [N-1:0] img [IMG][IMG];
  logic [N-1:0] filt [MAXK][MAXK];

  function automatic logic [31:0] mk_insn(int f3);
    return {6'b001101, 1'b1, 5'd2, 5'd1, 3'(f3), 5'd3, 7'b1010111};
  endfunction

  // issue one instruction, wait for its result and check the latency
  task automatic exec(input int f3, input logic [LANES-1:0][N-1:0] a,
                      input logic [LANES-1:0][N-1:0] b,
                      output logic [LANES-1:0][N-1:0] r);
    int lat = 0;
    insn = mk_insn(f3); pv1 = a; pv2 = b; in_valid = 1;
    @(posedge clk); #1;
    in_valid = 0;
    lat = 1;
    while (!out_valid && lat < 20) begin @(posedge clk); #1; lat++; end
    checks++;
    if (lat != LAT || out_illegal) begin
      failures++; $display("FAIL: latency %0d illegal %0b", lat, out_illegal);
    end
    r = posit_rst;
    n_instr++;
  endtask

  function automatic logic [31:0] rand_act();
    logic [31:0] p = $urandom();
    p[31] = 0; p[30] = 0;                   // 0 <= x < 1
    if ($urandom_range(0, 7) == 0) p = '0;  // some zero activations
    return p;
  endfunction

  function automatic logic [31:0] rand_wgt();
    logic [31:0] p = $urandom();
    p[31] = 0; p[30] = 0; p[29] = 0;        // |w| < 1/4
    return ($urandom_range(0, 1) == 1) ? -p : p;
  endfunction

  // one output pixel of a KxK filter; prog 0 = vpmul + vpadd, 1 = vpdot
  task automatic pixel(input int k_sz, input int i, input int j, input int prog);
    logic [LANES-1:0][N-1:0] a, b, r, s1, zero_v;
    logic [15:0][31:0] a16, b16;
    logic [N-1:0] sum, sum_ref, row_ref, p_ref [LANES];
    zero_v = '0;
    sum = '0; sum_ref = '0;
    for (int k = 0; k < k_sz; k++) begin
      for (int c0 = 0; c0 < k_sz; c0 += LANES) begin
        a = '0; b = '0; a16 = '0; b16 = '0;
        for (int l = 0; l < LANES; l++)
          if (c0 + l < k_sz) begin
            a[l] = img[i + k][j + c0 + l];
            b[l] = filt[k][c0 + l];
            a16[l] = a[l]; b16[l] = b[l];
          end
        if (prog == 0) begin
          exec(2, a, b, r);                                   // vpmul
          for (int l = 0; l < LANES; l++) p_ref[l] = ref_mul(a[l], b[l], N, ES);
          exec(0, {zero_v[3:2], r[2], r[0]}, {zero_v[3:2], r[3], r[1]}, s1);
          exec(0, {zero_v[3:1], s1[0]}, {zero_v[3:1], s1[1]}, r);
          row_ref = ref_add(ref_add(p_ref[0], p_ref[1], 0, N, ES),
                            ref_add(p_ref[2], p_ref[3], 0, N, ES), 0, N, ES);
        end else begin
          exec(4, a, b, r);                                   // vpdot
          row_ref = ref_dot(a16, b16, LANES, N, ES);
        end
        exec(0, {zero_v[3:1], sum}, {zero_v[3:1], r[0]}, s1);  // sum += row
        sum = s1[0];
        sum_ref = ref_add(sum_ref, row_ref, 0, N, ES);
      end
    end
    checks++;
    if (sum !== sum_ref) begin
      failures++;
      $display("FAIL: %0dx%0d prog %0d pixel (%0d,%0d) got %h exp %h",
               k_sz, k_sz, prog, i, j, sum, sum_ref);
    end
  endtask

  initial begin
    for (int y = 0; y < IMG; y++) for (int x = 0; x < IMG; x++) img[y][x] = rand_act();
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    foreach (filt[y, x]) filt[y][x] = rand_wgt();
    for (int prog = 0; prog < 2; prog++)
      for (int i = 0; i < OUT; i++)
        for (int j = 0; j < OUT; j++) pixel(4, i, j, prog);
    foreach (filt[y, x]) filt[y][x] = rand_wgt();
    for (int prog = 0; prog < 2; prog++)
      for (int i = 0; i < OUT; i++)
        for (int j = 0; j < OUT; j++) pixel(7, i, j, prog);
    $display("conv pixels checked, %0d instructions issued", n_instr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
