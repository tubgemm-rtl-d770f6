// pe_array: the M x P grid of tub_pe processing elements.
//
// PE (i, j) accumulates element (i, j) of Y. All PEs of row i share lane i of
// the temporal-unary encoder (unary_a, a_is_odd, a_is_neg); all PEs of column
// j share element j of the current row of B (magnitude and sign). Each step
// therefore computes the outer product of one column of A and one row of B
// and adds it into the M x P accumulators. There is no systolic movement of
// data: every PE sees its row and column signals in the same cycle, as in the
// published block diagram. load_c loads C into all accumulators at once.
// Timing: y is the registered accumulator of each PE.
module pe_array
  import tub_pkg::*;
#(
  parameter int unsigned M     = DEF_M,
  parameter int unsigned P     = DEF_P,
  parameter int unsigned BW    = DEF_BW,
  parameter int unsigned ACC_W = acc_width(DEF_BW, DEF_N)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load_c,
  input  logic signed [ACC_W-1:0] c        [M][P],
  input  logic        [M-1:0]     unary_a,
  input  logic        [M-1:0]     a_is_odd,
  input  logic        [M-1:0]     a_is_neg,
  input  logic        [BW-1:0]    b_mag    [P],
  input  logic        [P-1:0]     b_is_neg,
  output logic signed [ACC_W-1:0] y        [M][P]
);

  for (genvar i = 0; i < M; i++) begin : g_row
    for (genvar j = 0; j < P; j++) begin : g_col
      tub_pe #(.BW(BW), .ACC_W(ACC_W)) u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .load_c   (load_c),
        .c_in     (c[i][j]),
        .unary_a  (unary_a[i]),
        .a_is_odd (a_is_odd[i]),
        .a_is_neg (a_is_neg[i]),
        .b_mag    (b_mag[j]),
        .b_is_neg (b_is_neg[j]),
        .acc      (y[i][j])
      );
    end
  end

endmodule
