// gemm_runner: test harness that runs one GEMM on a tubgemm instance of a
// given shape and checks it.
//
// When go rises it draws random matrices in which the largest magnitude of
// every column of A is exactly MAXMAG (a negative MAXMAG means the worst
// case: 2^(BW-1) for bipolar data, 2^BW - 1 for unipolar data), starts the
// unit, counts the cycles from the start cycle to the first out_valid cycle
// (both included), checks that count against N*(floor(m/2)+(m mod 2)+2)+2
// and checks every element of Y against C + A x B. Results are left on the
// outputs when finished rises.
module gemm_runner
  import tub_pkg::*;
#(
  parameter int unsigned M       = 16,
  parameter int unsigned N       = 16,
  parameter int unsigned P       = 16,
  parameter int unsigned BW      = 8,
  parameter bit          BIPOLAR = 1'b1,
  parameter int          MAXMAG  = -1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  output logic finished,
  output int   checks,
  output int   failures,
  output int   cycles
);
  localparam int unsigned AW = acc_width(BW, N);
  localparam int MAG = (MAXMAG >= 0) ? MAXMAG : (BIPOLAR ? 2 ** (BW - 1) : 2 ** BW - 1);

  logic                 start;
  logic        [BW-1:0] a [M][N];
  logic        [BW-1:0] b [N][P];
  logic signed [AW-1:0] c [M][P];
  logic signed [AW-1:0] y [M][P];
  logic                 busy, out_valid;

  int av [M][N];
  int bv [N][P];

  tubgemm #(.M(M), .N(N), .P(P), .BW(BW), .BIPOLAR(BIPOLAR)) dut (
    .clk, .rst_n, .start, .a, .b, .c, .y, .busy, .out_valid);

  // a random element of magnitude at most mx
  function automatic int rand_elem(input int mx);
    int v;
    v = $urandom_range(0, mx);
    if (BIPOLAR && $urandom_range(0, 1) == 1) v = -v;
    if (BIPOLAR && v == 2 ** (BW - 1)) v = -v;  // +2^(BW-1) is not representable
    return v;
  endfunction

  initial begin
    finished = 1'b0; checks = 0; failures = 0; cycles = 0; start = 1'b0;
    for (int i = 0; i < M; i++) for (int k = 0; k < N; k++) a[i][k] = '0;
    for (int k = 0; k < N; k++) for (int j = 0; j < P; j++) b[k][j] = '0;
    for (int i = 0; i < M; i++) for (int j = 0; j < P; j++) c[i][j] = '0;
    wait (go);
    for (int k = 0; k < N; k++) begin
      int lead;
      lead = $urandom_range(0, M - 1);
      for (int i = 0; i < M; i++) begin
        av[i][k] = rand_elem(MAG);
        if (i == lead) av[i][k] = (BIPOLAR && MAG == 2 ** (BW - 1)) ? -MAG : MAG;
        a[i][k] = BW'(av[i][k]);
      end
    end
    for (int k = 0; k < N; k++)
      for (int j = 0; j < P; j++) begin
        bv[k][j] = BIPOLAR ? int'($urandom_range(0, 2 ** BW - 1)) - 2 ** (BW - 1)
                           : int'($urandom_range(0, 2 ** BW - 1));
        b[k][j] = BW'(bv[k][j]);
      end
    for (int i = 0; i < M; i++)
      for (int j = 0; j < P; j++) c[i][j] = AW'($urandom_range(0, 2 ** (AW - 4)));  // leaves room for A x B
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    cycles = 2;  // the start cycle and, below, the first out_valid cycle
    while (!out_valid && cycles < 1000000) begin
      @(negedge clk);
      cycles++;
    end
    checks++;
    if (cycles != int'(N * step_cycles(MAG) + 2)) begin
      failures++;
      $display("FAIL %0dx%0d %0d-bit: %0d cycles, expected %0d", M, P, BW, cycles,
               N * step_cycles(MAG) + 2);
    end
    for (int i = 0; i < M; i++)
      for (int j = 0; j < P; j++) begin
        longint r;
        r = longint'(c[i][j]);
        for (int k = 0; k < N; k++) r += longint'(av[i][k]) * longint'(bv[k][j]);
        checks++;
        if (longint'(y[i][j]) != r) failures++;
      end
    finished = 1'b1;
  end
endmodule
