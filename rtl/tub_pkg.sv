// tub_pkg: constants and helper functions shared by the tubGEMM modules.
//
// The default array shape is the largest configuration evaluated for this
// design: a 128x128 PE array multiplying 128x128 matrices of 8-bit integers.
// acc_width() sizes the accumulators so that a full dot product of N signed
// BW-bit products plus a bias of the same width cannot overflow (this width is
// a choice of this implementation; the published design does not state one).
// wc_cycles() is the worst-case latency of one GEMM in clock cycles for the
// sequencing used here (one vector-load cycle, up to 2^(BW-2) unary/odd cycles
// and one done cycle per step, plus the start cycle and the out_valid cycle),
// which equals the published N*(2^(BW-2)+2)+2 cycle figure.
package tub_pkg;

  localparam int unsigned DEF_M  = 128;  // rows of A and of the PE array
  localparam int unsigned DEF_N  = 128;  // columns of A = rows of B = steps
  localparam int unsigned DEF_P  = 128;  // columns of B and of the PE array
  localparam int unsigned DEF_BW = 8;    // element bit width

  // Accumulator width: a product of two BW-bit values needs 2*BW bits with
  // sign, N of them add $clog2(N) bits, one more bit keeps room for C.
  function automatic int unsigned acc_width(int unsigned bw, int unsigned n);
    return 2 * bw + $clog2(n) + 1;
  endfunction

  // Cycles taken by one step whose largest magnitude is mag: floor(mag/2)
  // unary cycles, one odd-correction cycle if mag is odd, one load cycle and
  // one done cycle.
  function automatic int unsigned step_cycles(int unsigned mag);
    return mag / 2 + mag % 2 + 2;
  endfunction

  // Worst-case cycles of a bipolar GEMM, from the cycle start is sampled to
  // the first cycle out_valid is high, both counted.
  function automatic int unsigned wc_cycles(int unsigned n, int unsigned bw);
    return n * step_cycles(1 << (bw - 1)) + 2;
  endfunction

endpackage
