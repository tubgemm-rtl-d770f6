// tu_encoder: twos-unary temporal encoder for one column of A.
//
// A single counter counts 0, 2, 4, ... while enabled, and one comparator per
// lane turns the lane's magnitude |a| into a temporal-unary pulse: unary_a is
// high for floor(|a|/2) consecutive cycles, each of which is worth 2*b in the
// PEs. If |a| is odd, a_is_odd is high for exactly one further cycle, right
// after the unary pulse, in which the PEs add b instead of 2*b. A lane whose
// value is zero never pulses, so a column of small values (bit sparsity) or of
// zeros (word sparsity) finishes early. done is high in the first enabled
// cycle in which no lane is active; the counter returns to 0 on that cycle.
//
// Published: the count-by-2 counter, the M comparators, floor(n/2) unary
// cycles and a_is_odd in the last cycle. This design's choices: the
// comparison is (count + 1) < |a| (a plain |a| > count would give
// ceil(n/2) cycles and double-count odd values); a_is_odd is the cycle where
// count + 1 == |a|, i.e. the cycle right after the pulse, so it never
// coincides with a unary cycle; a_is_neg is the lane's sign, passed through.
// Timing: outputs are combinational from the counter and the held column;
// a step with largest magnitude m takes floor(m/2) + (m mod 2) active cycles
// plus the done cycle.
module tu_encoder
  import tub_pkg::*;
#(
  parameter int unsigned M  = DEF_M,   // lanes (rows of A)
  parameter int unsigned BW = DEF_BW   // magnitude width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic [BW-1:0] a_mag    [M],
  input  logic [M-1:0]  a_neg,
  output logic [M-1:0]  unary_a,
  output logic [M-1:0]  a_is_odd,
  output logic [M-1:0]  a_is_neg,
  output logic          done
);

  // One bit wider than a magnitude: the count reaches |a| + 1 <= 2^BW.
  logic [BW:0] count;
  logic [BW:0] count_odd;

  assign count_odd = count | (BW + 1)'(1);

  for (genvar i = 0; i < M; i++) begin : g_cmp
    assign unary_a[i]  = en && (count_odd < {1'b0, a_mag[i]});
    assign a_is_odd[i] = en && (count_odd == {1'b0, a_mag[i]});
  end

  assign a_is_neg = a_neg;
  assign done     = en && !(|(unary_a | a_is_odd));

  always_ff @(posedge clk) begin
    if (!rst_n)             count <= '0;
    else if (en && !done)   count <= count + (BW + 1)'(2);
    else                    count <= '0;
  end

  // A lane is never in a unary cycle and an odd-correction cycle at once.
  a_odd_excl : assert property (@(posedge clk) disable iff (!rst_n) (unary_a & a_is_odd) == '0);

endmodule
