// tb_tu_encoder: self-checking test of the twos-unary temporal encoder.
//
// For many random columns (with zeros, odd values, the maximum 2^BW - 1 and
// an all-zero column planted) the encoder is enabled and every cycle is
// checked against the expected waveform worked out from each magnitude m:
// unary_a high in cycles 0 .. floor(m/2)-1, a_is_odd high in cycle
// floor(m/2) only if m is odd, and done high in cycle
// max(floor(m/2) + m mod 2) and in no earlier cycle. a_is_neg must follow the
// sign input, and outputs must be low while en is low.
module tb_tu_encoder;
  localparam int unsigned M  = 6;
  localparam int unsigned BW = 8;

  logic          clk = 1'b0;
  logic          rst_n;
  logic          en;
  logic [BW-1:0] a_mag [M];
  logic [M-1:0]  a_neg;
  logic [M-1:0]  unary_a, a_is_odd, a_is_neg;
  logic          done;

  int checks = 0, failures = 0;

  tu_encoder #(.M(M), .BW(BW)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    rst_n = 1'b0; en = 1'b0; a_neg = '0;
    for (int i = 0; i < M; i++) a_mag[i] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int t = 0; t < 60; t++) begin
      int m [M];
      int steps;
      steps = 0;
      for (int i = 0; i < M; i++) begin
        case (t % 4)
          0: m[i] = $urandom_range(0, 2 ** BW - 1);
          1: m[i] = $urandom_range(0, 9);
          2: m[i] = (i == 0) ? 2 ** BW - 1 : $urandom_range(0, 3);
          default: m[i] = (t == 3) ? 0 : $urandom_range(0, 2 ** (BW - 1));
        endcase
        a_mag[i] = BW'(m[i]);
        if (m[i] / 2 + m[i] % 2 > steps) steps = m[i] / 2 + m[i] % 2;
      end
      a_neg = M'($urandom);
      // one idle cycle: nothing may be asserted
      en = 1'b0;
      #1;
      check(unary_a == '0 && a_is_odd == '0 && !done, "idle outputs low");
      @(negedge clk);
      en = 1'b1;
      for (int c = 0; c <= steps; c++) begin
        #1;
        for (int i = 0; i < M; i++) begin
          check(unary_a[i] == (c < m[i] / 2), "unary pulse");
          check(a_is_odd[i] == ((m[i] % 2 == 1) && c == m[i] / 2), "odd correction");
        end
        check(a_is_neg == a_neg, "sign passthrough");
        check(done == (c == steps), "done timing");
        @(negedge clk);
      end
      en = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
