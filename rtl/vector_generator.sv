// vector_generator: selects the vector of the current step and splits it into
// sign and magnitude.
//
// tubGEMM has two of these. The A-side instance is given A transposed
// (mat[k] = column k of A, LEN = M) and feeds the temporal-unary encoder; the
// B-side instance is given B (mat[k] = row k of B, LEN = P) and feeds the PE
// array columns with b and b_is_neg. Selecting the vector by index follows the
// published design; the rest is this design's choice: the output is registered
// (captured in the sequencer's load cycle and held for the whole step), and
// each element leaves in sign-magnitude form, since the PEs add or subtract a
// magnitude according to the XOR of the two signs. With BIPOLAR = 0 the
// elements are unsigned (unipolar): is_neg is 0 and mag is the value itself.
// The magnitude of the most negative value, -2^(BW-1), is 2^(BW-1), which
// still fits in BW unsigned bits.
// Timing: mag/is_neg change on the clock edge that ends a load cycle.
module vector_generator
  import tub_pkg::*;
#(
  parameter  int unsigned LEN     = DEF_M,   // elements per vector
  parameter  int unsigned N       = DEF_N,   // number of vectors (steps)
  parameter  int unsigned BW      = DEF_BW,  // element width
  parameter  bit          BIPOLAR = 1'b1,    // two's complement elements
  localparam int unsigned IW      = $clog2(N + 1),
  localparam int unsigned SW      = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,             // capture vector index
  input  logic [IW-1:0] index,
  input  logic [BW-1:0] mat    [N][LEN],  // mat[k][i]: element i of vector k
  output logic [BW-1:0] mag    [LEN],
  output logic [LEN-1:0] is_neg
);

  // In-range part of the index; out-of-range indices select zeros.
  logic [SW-1:0] row;
  assign row = SW'(index);

  for (genvar i = 0; i < LEN; i++) begin : g_elem
    logic [BW-1:0] sel;
    logic          neg;

    always_comb begin
      sel = (index < IW'(N)) ? mat[row][i] : '0;
      neg = BIPOLAR && sel[BW-1];
    end

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        mag[i]    <= '0;
        is_neg[i] <= 1'b0;
      end else if (load) begin
        mag[i]    <= neg ? BW'(-sel) : sel;
        is_neg[i] <= neg;
      end
    end
  end

endmodule
