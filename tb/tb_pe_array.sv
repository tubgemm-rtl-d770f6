// tb_pe_array: self-checking test of the M x P PE grid.
//
// The test plays the role of encoder and B-side vector generator: for each of
// several steps it picks a random signed column a (length M) and row b
// (length P), raises each row's unary_a for floor(|a_i|/2) cycles and its
// a_is_odd in the cycle after, and holds the row of b as magnitudes and
// signs. After each step every accumulator must equal C plus the running sum
// of outer products, computed here with integer arithmetic. This checks that
// row signals reach only their row and column signals only their column.
module tb_pe_array;
  localparam int unsigned M     = 3;
  localparam int unsigned P     = 4;
  localparam int unsigned BW    = 8;
  localparam int unsigned ACC_W = 24;

  logic                    clk = 1'b0;
  logic                    rst_n;
  logic                    load_c;
  logic signed [ACC_W-1:0] c [M][P];
  logic        [M-1:0]     unary_a, a_is_odd, a_is_neg;
  logic        [BW-1:0]    b_mag [P];
  logic        [P-1:0]     b_is_neg;
  logic signed [ACC_W-1:0] y [M][P];

  int checks = 0, failures = 0;
  longint ref_y [M][P];

  pe_array #(.M(M), .P(P), .BW(BW), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    rst_n = 1'b0; load_c = 1'b0; unary_a = '0; a_is_odd = '0; a_is_neg = '0; b_is_neg = '0;
    for (int j = 0; j < P; j++) b_mag[j] = '0;
    for (int i = 0; i < M; i++)
      for (int j = 0; j < P; j++) begin
        ref_y[i][j] = int'($urandom_range(0, 20000)) - 10000;
        c[i][j] = ACC_W'(ref_y[i][j]);
      end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    load_c = 1'b1;
    @(negedge clk) load_c = 1'b0;
    for (int i = 0; i < M; i++)
      for (int j = 0; j < P; j++) check(longint'(y[i][j]) == ref_y[i][j], "C load");
    for (int s = 0; s < 12; s++) begin
      int a [M];
      int b [P];
      int ma [M];
      int steps;
      steps = 0;
      for (int i = 0; i < M; i++) begin
        a[i] = (s == 0 && i == 0) ? -128 : int'($urandom_range(0, 255)) - 128;
        if (s == 1) a[i] = 0;
        ma[i] = (a[i] < 0) ? -a[i] : a[i];
        if (ma[i] / 2 + ma[i] % 2 > steps) steps = ma[i] / 2 + ma[i] % 2;
      end
      for (int j = 0; j < P; j++) begin
        b[j] = (s == 2 && j == 1) ? -128 : int'($urandom_range(0, 255)) - 128;
        b_mag[j] = BW'((b[j] < 0) ? -b[j] : b[j]);
        b_is_neg[j] = (b[j] < 0);
      end
      for (int i = 0; i < M; i++) a_is_neg[i] = (a[i] < 0);
      for (int c = 0; c < steps; c++) begin
        for (int i = 0; i < M; i++) begin
          unary_a[i]  = (c < ma[i] / 2);
          a_is_odd[i] = (ma[i] % 2 == 1) && (c == ma[i] / 2);
        end
        @(negedge clk);
      end
      unary_a = '0; a_is_odd = '0;
      for (int i = 0; i < M; i++)
        for (int j = 0; j < P; j++) begin
          ref_y[i][j] += longint'(a[i]) * longint'(b[j]);
          check(longint'(y[i][j]) == ref_y[i][j], "outer-product accumulation");
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
