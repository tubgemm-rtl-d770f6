// tub_pe: temporal-unary x binary multiply-accumulate processing element.
//
// The PE multiplies a temporal-unary a by a binary b sequentially: in every
// cycle in which unary_a or a_is_odd is high (en = unary_a | a_is_odd) it adds
// an operand to its accumulator. The operand is b << 1 in unary cycles (each
// twos-unary cycle is worth 2) and b itself in the odd-correction cycle. b
// arrives as a magnitude; the XOR of the signs of a and b chooses between
// adding and subtracting, so the PE computes signed products with unsigned
// arithmetic on b. load_c overwrites the accumulator with the bias C at the
// start of a GEMM, so that after N steps it holds sum_k a_k * b_k + C.
//
// Published: the b / b<<1 multiplexer under a_is_odd, the XOR-driven add/sub,
// the OR enable and the accumulator register. This design's choices: the
// accumulator width (ACC_W, signed), the load_c port for C, and reset to 0.
// Timing: one accumulation per enabled clock edge; acc is a register output.
module tub_pe
  import tub_pkg::*;
#(
  parameter int unsigned BW    = DEF_BW,
  parameter int unsigned ACC_W = acc_width(DEF_BW, DEF_N)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load_c,
  input  logic signed [ACC_W-1:0] c_in,
  input  logic                    unary_a,
  input  logic                    a_is_odd,
  input  logic                    a_is_neg,
  input  logic        [BW-1:0]    b_mag,
  input  logic                    b_is_neg,
  output logic signed [ACC_W-1:0] acc
);

  logic             en;
  logic             sub;
  logic [BW:0]      operand;
  logic [ACC_W-1:0] operand_ext;

  assign en          = unary_a || a_is_odd;
  assign sub         = a_is_neg ^ b_is_neg;
  assign operand     = a_is_odd ? {1'b0, b_mag} : {b_mag, 1'b0};
  assign operand_ext = ACC_W'(operand);

  always_ff @(posedge clk) begin
    if (!rst_n)      acc <= '0;
    else if (load_c) acc <= c_in;
    else if (en)     acc <= sub ? acc - $signed(operand_ext) : acc + $signed(operand_ext);
  end

endmodule
