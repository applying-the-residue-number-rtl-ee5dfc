// rns_relu: ReLU on an RNS number by a half comparator, combinational.
//
// A negative activation v is stored as M + v, so X encodes a negative value exactly when
// X >= RELU_THR = (M+1)/2. Against this fixed threshold the full comparator shrinks: the
// additive inverse of the threshold (NEG_RELU_THR) is a constant operand of the RNS adder and
// the threshold's parity is a constant, so only two parity units remain:
//   negative = (parity(X - RELU_THR) == parity(X) xor parity(RELU_THR)),
//   y        = negative ? 0 : X.
// The half comparator follows the paper; the exact threshold (M+1)/2 for the paper's "M/2"
// is this design's choice.
//
// Interface: x canonical RNS number; y = ReLU(x); negative flags a clamped input.
module rns_relu
  import rns_pkg::*;
(
  input  rns_t x,
  output rns_t y,
  output logic negative
);

  rns_t c;
  logic par_x, par_c;

  rns_add    u_sub (.a(x), .b(NEG_RELU_THR), .s(c));
  rns_parity u_px  (.x(x), .parity(par_x));
  rns_parity u_pc  (.x(c), .parity(par_c));

  assign negative = (par_c == (par_x ^ RELU_THR_PARITY));
  assign y        = negative ? '0 : x;

endmodule
