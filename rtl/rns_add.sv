// rns_add: element-wise addition of two RNS numbers (the RNS counterpart of a 32-bit adder).
//
// Each of the four residues is added in its own modulo adder with no carry between them:
// parallel-prefix end-around-carry adders for 2^n-1 and 2^(n+1)-1, output-corrected adders
// for 2^n+1 and 2^(n+1)+1. The moduli set is the paper's; the adder styles are described in
// rns_modadd_m1 and rns_modadd_p1.
//
// Interface: purely combinational; s = (a + b) mod M, residue by residue.
module rns_add
  import rns_pkg::*;
(
  input  rns_t a,
  input  rns_t b,
  output rns_t s
);

  rns_modadd_m1 #(.K(N))     u_m1  (.a(a.x1),  .b(b.x1),  .s(s.x1));
  rns_modadd_p1 #(.K(N))     u_p1  (.a(a.x1s), .b(b.x1s), .s(s.x1s));
  rns_modadd_m1 #(.K(N + 1)) u_m2  (.a(a.x2),  .b(b.x2),  .s(s.x2));
  rns_modadd_p1 #(.K(N + 1)) u_p2  (.a(a.x2s), .b(b.x2s), .s(s.x2s));

endmodule
