// tubgemm: temporal-unary / binary matrix multiply unit, Y = A x B + C.
//
// A is M x N, B is N x P, C and Y are M x P. The computation runs as N
// outer-product steps. In step k the A-side vector generator presents column
// k of A to the temporal-unary encoder, which turns each element into a
// twos-unary pulse (plus an odd-correction cycle and a sign); the B-side
// vector generator presents row k of B, as magnitudes and signs, to the
// columns of the PE array. Every PE (i, j) accumulates A[i][k] * B[k][j]
// sequentially. The step lasts as long as the largest magnitude of column k
// needs, so small values and zeros shorten the GEMM. The index counter
// advances on the encoder's done and raises out_valid after step N-1.
//
// Interface: pulse start for one cycle while busy is low; a, b and c must be
// held until out_valid. C is loaded into the accumulators on the start edge.
// y is valid while out_valid is high, which lasts until the next start.
// Timing: step k takes floor(m_k/2) + (m_k mod 2) + 2 cycles, with m_k the
// largest |A[i][k]|; counting the start cycle and the first out_valid cycle,
// a GEMM takes sum_k (that) + 2 cycles, at worst N*(2^(BW-2)+2)+2 for
// bipolar BW-bit data.
//
// The block structure (index counter, two vector generators, encoder, PE
// array) and their connections follow the published design. The start/busy
// handshake, the load cycle of each step, the C input port and the
// accumulator width are this design's own. BIPOLAR = 0 gives the unipolar
// (unsigned) variant that was also evaluated.
module tubgemm
  import tub_pkg::*;
#(
  parameter  int unsigned M       = DEF_M,
  parameter  int unsigned N       = DEF_N,
  parameter  int unsigned P       = DEF_P,
  parameter  int unsigned BW      = DEF_BW,
  parameter  bit          BIPOLAR = 1'b1,
  parameter  int unsigned ACC_W   = acc_width(BW, N),
  localparam int unsigned IW      = $clog2(N + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic        [BW-1:0]    a   [M][N],
  input  logic        [BW-1:0]    b   [N][P],
  input  logic signed [ACC_W-1:0] c   [M][P],
  output logic signed [ACC_W-1:0] y   [M][P],
  output logic                    busy,
  output logic                    out_valid
);

  logic [IW-1:0] index;
  logic          load;
  logic          enc_en;
  logic          done;

  logic [BW-1:0] a_t   [N][M];   // A transposed: a_t[k] is column k of A
  logic [BW-1:0] a_mag [M];
  logic [M-1:0]  a_neg;
  logic [BW-1:0] b_mag [P];
  logic [P-1:0]  b_neg;

  logic [M-1:0]  unary_a;
  logic [M-1:0]  a_is_odd;
  logic [M-1:0]  a_is_neg;

  for (genvar k = 0; k < N; k++) begin : g_tk
    for (genvar i = 0; i < M; i++) begin : g_ti
      assign a_t[k][i] = a[i][k];
    end
  end

  index_counter #(.N(N)) u_index (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (start),
    .done      (done),
    .index     (index),
    .load      (load),
    .enc_en    (enc_en),
    .busy      (busy),
    .out_valid (out_valid)
  );

  vector_generator #(.LEN(M), .N(N), .BW(BW), .BIPOLAR(BIPOLAR)) u_vgen_a (
    .clk    (clk),
    .rst_n  (rst_n),
    .load   (load),
    .index  (index),
    .mat    (a_t),
    .mag    (a_mag),
    .is_neg (a_neg)
  );

  vector_generator #(.LEN(P), .N(N), .BW(BW), .BIPOLAR(BIPOLAR)) u_vgen_b (
    .clk    (clk),
    .rst_n  (rst_n),
    .load   (load),
    .index  (index),
    .mat    (b),
    .mag    (b_mag),
    .is_neg (b_neg)
  );

  tu_encoder #(.M(M), .BW(BW)) u_enc (
    .clk      (clk),
    .rst_n    (rst_n),
    .en       (enc_en),
    .a_mag    (a_mag),
    .a_neg    (a_neg),
    .unary_a  (unary_a),
    .a_is_odd (a_is_odd),
    .a_is_neg (a_is_neg),
    .done     (done)
  );

  pe_array #(.M(M), .P(P), .BW(BW), .ACC_W(ACC_W)) u_array (
    .clk      (clk),
    .rst_n    (rst_n),
    .load_c   (start && !busy),
    .c        (c),
    .unary_a  (unary_a),
    .a_is_odd (a_is_odd),
    .a_is_neg (a_is_neg),
    .b_mag    (b_mag),
    .b_is_neg (b_neg),
    .y        (y)
  );

endmodule
