// tb_index_counter: self-checking test of the step sequencer.
//
// A cycle-level reference model runs beside the counter. The stimulus pulses
// start (also while busy, where it must be ignored) and done with random
// gaps, including done during load cycles (ignored) and while idle
// (ignored). Every cycle index, load, enc_en, busy and out_valid are compared
// with the model; out_valid must rise exactly when the index reaches N.
module tb_index_counter;
  localparam int unsigned N  = 5;
  localparam int unsigned IW = $clog2(N + 1);

  logic          clk = 1'b0;
  logic          rst_n;
  logic          start, done;
  logic [IW-1:0] index;
  logic          load, enc_en, busy, out_valid;

  int checks = 0, failures = 0;
  int gemms_done = 0;

  index_counter #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  // reference model state
  int  m_index;
  bit  m_busy, m_load;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t: index=%0d/%0d load=%0b/%0b busy=%0b/%0b ov=%0b", what, $time,
               index, m_index, load, m_load, busy, m_busy, out_valid);
    end
  endtask

  initial begin
    rst_n = 1'b0; start = 1'b0; done = 1'b0;
    m_index = 0; m_busy = 0; m_load = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int cyc = 0; cyc < 600; cyc++) begin
      // stimulus for this cycle
      start = ($urandom_range(0, 9) == 0);
      done  = ($urandom_range(0, 2) == 0);
      #1;
      check(index == IW'(m_index), "index");
      check(load == m_load, "load");
      check(busy == m_busy, "busy");
      check(enc_en == (m_busy && !m_load), "enc_en");
      check(out_valid == (m_index == N), "out_valid");
      @(posedge clk);
      // model update with the values sampled at this edge
      if (!m_busy) begin
        if (start) begin m_index = 0; m_busy = 1; m_load = 1; end
      end else if (m_load) begin
        m_load = 0;
      end else if (done) begin
        if (m_index == N - 1) begin m_index = N; m_busy = 0; gemms_done++; end
        else begin m_index++; m_load = 1; end
      end
      @(negedge clk);
    end
    check(gemms_done >= 5, "enough complete GEMMs");
    $display("complete GEMMs: %0d", gemms_done);
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
