// tb_vector_generator: self-checking test of the vector generator.
//
// Two instances, bipolar and unipolar, get the same random matrix (with the
// extreme values 0x80 and 0xFF planted). For random indices the test pulses
// load and checks that mag and is_neg hold the selected vector in
// sign-magnitude form, computed here from the integer value of each element,
// and that the outputs do not change while load is low.
module tb_vector_generator;
  localparam int unsigned LEN = 4;
  localparam int unsigned N   = 6;
  localparam int unsigned BW  = 8;
  localparam int unsigned IW  = $clog2(N + 1);

  logic          clk = 1'b0;
  logic          rst_n;
  logic          load;
  logic [IW-1:0] index;
  logic [BW-1:0] mat [N][LEN];
  logic [BW-1:0] mag_s [LEN], mag_u [LEN];
  logic [LEN-1:0] neg_s, neg_u;

  int checks = 0, failures = 0;

  vector_generator #(.LEN(LEN), .N(N), .BW(BW), .BIPOLAR(1'b1)) dut_s (
    .clk, .rst_n, .load, .index, .mat, .mag(mag_s), .is_neg(neg_s));
  vector_generator #(.LEN(LEN), .N(N), .BW(BW), .BIPOLAR(1'b0)) dut_u (
    .clk, .rst_n, .load, .index, .mat, .mag(mag_u), .is_neg(neg_u));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic check_vec(input int k);
    for (int i = 0; i < LEN; i++) begin
      int v;
      v = int'($signed(mat[k][i]));
      check(neg_s[i] == (v < 0), "bipolar sign");
      check(int'(mag_s[i]) == ((v < 0) ? -v : v), "bipolar magnitude");
      check(neg_u[i] == 1'b0, "unipolar sign");
      check(int'(mag_u[i]) == int'(mat[k][i]), "unipolar magnitude");
    end
  endtask

  initial begin
    rst_n = 1'b0; load = 1'b0; index = '0;
    for (int k = 0; k < N; k++)
      for (int i = 0; i < LEN; i++) mat[k][i] = BW'($urandom);
    mat[1][0] = 8'h80; mat[2][3] = 8'hFF; mat[3][2] = 8'h00; mat[4][1] = 8'h7F;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int t = 0; t < 40; t++) begin
      int k;
      k = (t < N) ? t : $urandom_range(0, N - 1);
      index = IW'(k); load = 1'b1;
      @(negedge clk);
      load = 1'b0;
      check_vec(k);
      // hold: a different index without load must not change the outputs
      index = IW'((k + 1) % N);
      @(negedge clk);
      check_vec(k);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
