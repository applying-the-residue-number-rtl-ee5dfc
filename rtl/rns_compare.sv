// rns_compare: full comparator of two RNS numbers, combinational.
//
// Comparison is reduced to parity checks. The residue-wise difference C = A - B (mod M) is
// A-B when A >= B and M+A-B when A < B; since M is odd the two candidates differ in parity, so
//   A >= B  <=>  parity(C) == parity(A) xor parity(B).
// B is negated residue by residue (an inverter for the 2^k-1 residues, 2^k+1-b for the 2^k+1
// residues), added to A in an RNS adder, and three parity units (rns_parity) evaluate A, B
// and C in parallel. The method follows the paper; this design uses three separate parity
// units rather than sharing one over several cycles.
//
// Interface: a, b canonical RNS numbers in [0, M), compared as unsigned integers;
// a_ge_b = (A >= B). Purely combinational.
module rns_compare
  import rns_pkg::*;
(
  input  rns_t a,
  input  rns_t b,
  output logic a_ge_b
);

  rns_t neg_b, c;
  logic par_a, par_b, par_c;

  assign neg_b = rns_neg(b);

  rns_add    u_sub (.a(a), .b(neg_b), .s(c));
  rns_parity u_pa  (.x(a), .parity(par_a));
  rns_parity u_pb  (.x(b), .parity(par_b));
  rns_parity u_pc  (.x(c), .parity(par_c));

  assign a_ge_b = (par_c == (par_a ^ par_b));

endmodule
