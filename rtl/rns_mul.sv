// rns_mul: element-wise multiplication of two RNS numbers (the RNS counterpart of a 32-bit
// multiplier).
//
// The four residues are multiplied independently: rotated-partial-product multipliers with
// an end-around-carry carry-save array for 2^n-1 and 2^(n+1)-1, and inverted-rotation
// partial-product multipliers for 2^n+1 and 2^(n+1)+1 (see rns_modmul_m1, rns_modmul_p1).
//
// Interface: purely combinational; p = (a * b) mod M, residue by residue.
module rns_mul
  import rns_pkg::*;
(
  input  rns_t a,
  input  rns_t b,
  output rns_t p
);

  rns_modmul_m1 #(.K(N))     u_m1 (.x(a.x1),  .y(b.x1),  .p(p.x1));
  rns_modmul_p1 #(.K(N))     u_p1 (.x(a.x1s), .y(b.x1s), .p(p.x1s));
  rns_modmul_m1 #(.K(N + 1)) u_m2 (.x(a.x2),  .y(b.x2),  .p(p.x2));
  rns_modmul_p1 #(.K(N + 1)) u_p2 (.x(a.x2s), .y(b.x2s), .p(p.x2s));

endmodule
