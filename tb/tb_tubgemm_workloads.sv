// tb_tubgemm_workloads: latency of the evaluated configurations.
//
// Runs one GEMM on each of these units and checks its result and cycle count,
// then prints the latency at a 400 MHz clock next to the published figure:
//   * 16x16 bipolar 8-bit, 4-bit and 2-bit, worst-case data (every column of
//     A holds -2^(BW-1));
//   * the worst-case latency of the 32x32, 64x64 and 128x128 8-bit
//     configurations. Latency depends only on N (the number of steps) and on
//     the column maxima of A, not on M or P, so these run with N = 32, 64 and
//     128 on an 8 x N x 8 unit to keep the build small;
//   * 16x16 unipolar 8-bit, worst-case data (255 in every column);
//   * 16x16 unipolar 8-bit with every column's maximum set to 82, the
//     expected maximum feature-map value measured for quantized MobileNetv2,
//     which shows the latency saved by bit sparsity.
// A latency more than 7% away from the published one counts as a failure.
module tb_tubgemm_workloads;
  localparam int NR = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic go = 1'b0;
  logic [NR-1:0] fin;
  int ck [NR];
  int fl [NR];
  int cy [NR];

  // published latency in ns and a label for each run
  real   pub_ns [NR] = '{2650.0, 5300.0, 10600.0, 21200.0, 250.0, 130.0, 5290.0, 1720.0};
  string label  [NR] = '{"16x16 8-bit bipolar WC", "N=32 (32x32) 8-bit bipolar WC",
                         "N=64 (64x64) 8-bit bipolar WC", "N=128 (128x128) 8-bit bipolar WC",
                         "16x16 4-bit bipolar WC", "16x16 2-bit bipolar WC",
                         "16x16 8-bit unipolar WC", "16x16 8-bit unipolar, max 82 (MobileNetv2)"};

  gemm_runner #(.M(16), .N(16), .P(16), .BW(8)) r0 (.clk, .rst_n, .go, .finished(fin[0]), .checks(ck[0]), .failures(fl[0]), .cycles(cy[0]));
  gemm_runner #(.M(8), .N(32), .P(8), .BW(8)) r1 (.clk, .rst_n, .go, .finished(fin[1]), .checks(ck[1]), .failures(fl[1]), .cycles(cy[1]));
  gemm_runner #(.M(8), .N(64), .P(8), .BW(8)) r2 (.clk, .rst_n, .go, .finished(fin[2]), .checks(ck[2]), .failures(fl[2]), .cycles(cy[2]));
  gemm_runner #(.M(8), .N(128), .P(8), .BW(8)) r3 (.clk, .rst_n, .go, .finished(fin[3]), .checks(ck[3]), .failures(fl[3]), .cycles(cy[3]));
  gemm_runner #(.M(16), .N(16), .P(16), .BW(4)) r4 (.clk, .rst_n, .go, .finished(fin[4]), .checks(ck[4]), .failures(fl[4]), .cycles(cy[4]));
  gemm_runner #(.M(16), .N(16), .P(16), .BW(2)) r5 (.clk, .rst_n, .go, .finished(fin[5]), .checks(ck[5]), .failures(fl[5]), .cycles(cy[5]));
  gemm_runner #(.M(16), .N(16), .P(16), .BW(8), .BIPOLAR(1'b0)) r6 (.clk, .rst_n, .go, .finished(fin[6]), .checks(ck[6]), .failures(fl[6]), .cycles(cy[6]));
  gemm_runner #(.M(16), .N(16), .P(16), .BW(8), .BIPOLAR(1'b0), .MAXMAG(82)) r7 (.clk, .rst_n, .go, .finished(fin[7]), .checks(ck[7]), .failures(fl[7]), .cycles(cy[7]));

  always #5 clk = ~clk;

  initial begin
    int checks, failures;
    checks = 0; failures = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    @(negedge clk) go = 1'b1;
    wait (&fin);
    #1;  // let the runners' result ports settle
    for (int r = 0; r < NR; r++) begin
      real ns;
      ns = cy[r] * 2.5;
      $display("%-44s %6d cycles = %8.1f ns at 400 MHz (published %8.1f ns)", label[r], cy[r], ns, pub_ns[r]);
      checks += ck[r] + 1;
      failures += fl[r];
      if (ns < 0.93 * pub_ns[r] || ns > 1.07 * pub_ns[r]) begin
        failures++;
        $display("FAIL latency of %s", label[r]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule
