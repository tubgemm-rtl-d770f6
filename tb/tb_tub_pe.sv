// tb_tub_pe: self-checking test of the temporal-unary x binary MAC.
//
// The test drives the PE the way the encoder would: for a signed a it raises
// unary_a for floor(|a|/2) cycles, then a_is_odd for one cycle if |a| is odd,
// with a_is_neg = sign(a), while b is presented as magnitude and sign. After
// a bias C is loaded, several such products are accumulated and the result is
// compared with C + sum(a*b) computed with integer arithmetic. The number of
// enabled cycles per product is also checked against floor(|a|/2)+(|a| mod 2).
module tb_tub_pe;
  localparam int unsigned BW    = 8;
  localparam int unsigned ACC_W = 24;

  logic                    clk = 1'b0;
  logic                    rst_n;
  logic                    load_c;
  logic signed [ACC_W-1:0] c_in;
  logic                    unary_a, a_is_odd, a_is_neg;
  logic        [BW-1:0]    b_mag;
  logic                    b_is_neg;
  logic signed [ACC_W-1:0] acc;

  int checks = 0, failures = 0;

  tub_pe #(.BW(BW), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t acc=%0d", what, $time, acc); end
  endtask

  function automatic int rand_val(input int sel);
    case (sel % 5)
      0: return -128;
      1: return 127;
      2: return $urandom_range(0, 7) - 3;
      default: return int'($urandom_range(0, 255)) - 128;
    endcase
  endfunction

  task automatic mac(input int a, input int b);
    int ma, cycles;
    ma = (a < 0) ? -a : a;
    b_mag = BW'((b < 0) ? -b : b); b_is_neg = (b < 0); a_is_neg = (a < 0);
    cycles = 0;
    for (int c = 0; c < ma / 2; c++) begin
      unary_a = 1'b1; a_is_odd = 1'b0; cycles++;
      @(negedge clk);
    end
    if (ma % 2 == 1) begin
      unary_a = 1'b0; a_is_odd = 1'b1; cycles++;
      @(negedge clk);
    end
    unary_a = 1'b0; a_is_odd = 1'b0;
    check(cycles == ma / 2 + ma % 2, "cycle count");
  endtask

  initial begin
    rst_n = 1'b0; load_c = 1'b0; c_in = '0; unary_a = 1'b0; a_is_odd = 1'b0;
    a_is_neg = 1'b0; b_mag = '0; b_is_neg = 1'b0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int t = 0; t < 80; t++) begin
      longint expect_v;
      int c;
      c = int'($urandom_range(0, 200000)) - 100000;
      c_in = ACC_W'(c); load_c = 1'b1;
      // b and sign lines toggle during the load cycle; only C must land
      unary_a = 1'b1; b_mag = 8'd5;
      @(negedge clk);
      load_c = 1'b0; unary_a = 1'b0;
      check(acc == ACC_W'(c), "bias load");
      expect_v = c;
      for (int k = 0; k < 4; k++) begin
        int a, b;
        a = rand_val($urandom); b = rand_val($urandom);
        mac(a, b);
        expect_v += longint'(a) * longint'(b);
        check(longint'(acc) == expect_v, "accumulated product");
      end
      // idle cycles leave the accumulator alone
      repeat (2) @(negedge clk);
      check(longint'(acc) == expect_v, "hold when disabled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
