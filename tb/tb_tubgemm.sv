// tb_tubgemm: end-to-end test of the matrix multiply unit, Y = A x B + C.
//
// Two small units run side by side: a bipolar 4x5x3 unit with 8-bit
// elements and a unipolar 3x4x2 unit with 4-bit elements. Each runs several
// GEMMs back to back on random matrices into which special cases are
// planted: an all-zero column of A (a step with no unary cycles), the most
// negative value -2^(BW-1) (the worst-case step), odd values (odd-correction
// cycles) and mixed signs (subtracting PEs). For every GEMM the test checks
// all of Y against C + A x B computed with integer arithmetic, and the number
// of cycles from start to out_valid against the expected
// sum over steps of (floor(m/2) + m mod 2 + 2), m the largest |A[i][k]|.
// A start pulse while busy must be ignored. The test counts how often each
// mechanism happened and fails if any never did.
module tb_tubgemm;
  import tub_pkg::*;

  // bipolar unit
  localparam int unsigned M  = 4, N = 5, P = 3, BW = 8;
  localparam int unsigned AW = acc_width(BW, N);
  // unipolar unit
  localparam int unsigned UM = 3, UN = 4, UP = 2, UBW = 4;
  localparam int unsigned UAW = acc_width(UBW, UN);

  logic clk = 1'b0;
  logic rst_n;

  logic                 start;
  logic        [BW-1:0] a [M][N];
  logic        [BW-1:0] b [N][P];
  logic signed [AW-1:0] c [M][P];
  logic signed [AW-1:0] y [M][P];
  logic                 busy, out_valid;

  logic                  ustart;
  logic        [UBW-1:0] ua [UM][UN];
  logic        [UBW-1:0] ub [UN][UP];
  logic signed [UAW-1:0] uc [UM][UP];
  logic signed [UAW-1:0] uy [UM][UP];
  logic                  ubusy, uout_valid;

  int checks = 0, failures = 0;
  int n_odd = 0, n_sub = 0, n_zero_step = 0, n_wc_step = 0, n_busy_start = 0, n_gemm = 0,
      n_unipolar = 0, n_bias = 0;

  tubgemm #(.M(M), .N(N), .P(P), .BW(BW), .BIPOLAR(1'b1)) dut (
    .clk, .rst_n, .start, .a, .b, .c, .y, .busy, .out_valid);

  tubgemm #(.M(UM), .N(UN), .P(UP), .BW(UBW), .BIPOLAR(1'b0)) dut_u (
    .clk, .rst_n, .start(ustart), .a(ua), .b(ub), .c(uc), .y(uy), .busy(ubusy),
    .out_valid(uout_valid));

  always #5 clk = ~clk;

  // mechanism counters, observed inside the bipolar unit
  always @(posedge clk) if (rst_n) begin
    n_odd += $countones(dut.a_is_odd);
    for (int i = 0; i < M; i++)
      for (int j = 0; j < P; j++)
        if ((dut.unary_a[i] || dut.a_is_odd[i]) && (dut.a_is_neg[i] ^ dut.b_neg[j]) &&
            dut.b_mag[j] != 0) n_sub++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic int rand_signed(input int bw);
    int r;
    r = $urandom_range(0, 5);
    if (r == 0) return 0;
    if (r == 1) return -(2 ** (bw - 1));
    return int'($urandom_range(0, 2 ** bw - 1)) - 2 ** (bw - 1);
  endfunction

  task automatic run_bipolar(input int t);
    int av [M][N];
    int bv [N][P];
    longint ref_y [M][P];
    int expect_cycles, cycles;
    for (int i = 0; i < M; i++)
      for (int k = 0; k < N; k++) begin
        av[i][k] = rand_signed(BW);
        if (k == (t % N)) av[i][k] = 0;                         // zero column
        if (t % 3 == 1 && k == 0) av[i][k] = -(2 ** (BW - 1));  // worst-case step
        a[i][k] = BW'(av[i][k]);
      end
    for (int k = 0; k < N; k++)
      for (int j = 0; j < P; j++) begin
        bv[k][j] = rand_signed(BW);
        b[k][j] = BW'(bv[k][j]);
      end
    for (int i = 0; i < M; i++)
      for (int j = 0; j < P; j++) begin
        ref_y[i][j] = (t == 0) ? 0 : int'($urandom_range(0, 200000)) - 100000;
        c[i][j] = AW'(ref_y[i][j]);
        if (ref_y[i][j] != 0) n_bias++;
        for (int k = 0; k < N; k++) ref_y[i][j] += longint'(av[i][k]) * longint'(bv[k][j]);
      end
    expect_cycles = 0;
    for (int k = 0; k < N; k++) begin
      int mx;
      mx = 0;
      for (int i = 0; i < M; i++) begin
        int m;
        m = (av[i][k] < 0) ? -av[i][k] : av[i][k];
        if (m > mx) mx = m;
      end
      if (mx == 0) n_zero_step++;
      if (mx == 2 ** (BW - 1)) n_wc_step++;
      expect_cycles += step_cycles(mx);
    end
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cycles = 1;
    while (!out_valid) begin
      // a second start while busy must be ignored
      if (cycles == 3) begin start = 1'b1; n_busy_start++; end
      else start = 1'b0;
      @(negedge clk);
      cycles++;
      if (cycles > 100000) break;
    end
    start = 1'b0;
    check(cycles - 1 == expect_cycles, "GEMM cycle count");
    if (cycles - 1 != expect_cycles) $display("  cycles %0d expected %0d", cycles - 1, expect_cycles);
    for (int i = 0; i < M; i++)
      for (int j = 0; j < P; j++) begin
        check(longint'(y[i][j]) == ref_y[i][j], "Y element");
      end
    // Y and out_valid hold until the next start
    @(negedge clk);
    check(out_valid && !busy, "out_valid holds");
    n_gemm++;
  endtask

  task automatic run_unipolar();
    int av [UM][UN];
    int bv [UN][UP];
    longint ref_y [UM][UP];
    int expect_cycles, cycles;
    for (int i = 0; i < UM; i++)
      for (int k = 0; k < UN; k++) begin
        av[i][k] = $urandom_range(0, 2 ** UBW - 1);
        if (i == 0 && k == 1) av[i][k] = 2 ** UBW - 1;
        ua[i][k] = UBW'(av[i][k]);
      end
    for (int k = 0; k < UN; k++)
      for (int j = 0; j < UP; j++) begin
        bv[k][j] = $urandom_range(0, 2 ** UBW - 1);
        ub[k][j] = UBW'(bv[k][j]);
      end
    for (int i = 0; i < UM; i++)
      for (int j = 0; j < UP; j++) begin
        ref_y[i][j] = $urandom_range(0, 100);
        uc[i][j] = UAW'(ref_y[i][j]);
        for (int k = 0; k < UN; k++) ref_y[i][j] += longint'(av[i][k]) * longint'(bv[k][j]);
      end
    expect_cycles = 0;
    for (int k = 0; k < UN; k++) begin
      int mx;
      mx = 0;
      for (int i = 0; i < UM; i++) if (av[i][k] > mx) mx = av[i][k];
      expect_cycles += step_cycles(mx);
    end
    ustart = 1'b1;
    @(negedge clk);
    ustart = 1'b0;
    cycles = 0;
    while (!uout_valid && cycles < 100000) begin
      @(negedge clk);
      cycles++;
    end
    check(cycles == expect_cycles, "unipolar cycle count");
    for (int i = 0; i < UM; i++)
      for (int j = 0; j < UP; j++) check(longint'(uy[i][j]) == ref_y[i][j], "unipolar Y element");
    n_unipolar++;
  endtask

  initial begin
    rst_n = 1'b0; start = 1'b0; ustart = 1'b0;
    for (int i = 0; i < M; i++) for (int k = 0; k < N; k++) a[i][k] = '0;
    for (int k = 0; k < N; k++) for (int j = 0; j < P; j++) b[k][j] = '0;
    for (int i = 0; i < M; i++) for (int j = 0; j < P; j++) c[i][j] = '0;
    for (int i = 0; i < UM; i++) for (int k = 0; k < UN; k++) ua[i][k] = '0;
    for (int k = 0; k < UN; k++) for (int j = 0; j < UP; j++) ub[k][j] = '0;
    for (int i = 0; i < UM; i++) for (int j = 0; j < UP; j++) uc[i][j] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    @(negedge clk);
    check(!out_valid && !busy, "idle after reset");
    for (int t = 0; t < 12; t++) run_bipolar(t);
    for (int t = 0; t < 6; t++) run_unipolar();
    $display("mechanisms: gemms=%0d odd_corrections=%0d subtracting_pe_cycles=%0d zero_steps=%0d worst_case_steps=%0d ignored_starts=%0d bias_loads=%0d unipolar_gemms=%0d",
             n_gemm, n_odd, n_sub, n_zero_step, n_wc_step, n_busy_start, n_bias, n_unipolar);
    check(n_odd > 0, "odd correction happened");
    check(n_sub > 0, "subtraction happened");
    check(n_zero_step > 0, "zero step happened");
    check(n_wc_step > 0, "worst-case step happened");
    check(n_busy_start > 0, "start while busy happened");
    check(n_bias > 0, "bias C happened");
    check(n_unipolar > 0, "unipolar GEMM happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
