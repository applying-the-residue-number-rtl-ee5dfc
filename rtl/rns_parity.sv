// rns_parity: parity (X mod 2) of an RNS number X = (x1, x1s, x2, x2s), combinational.
//
// The number is first reconstructed on the two moduli pairs by mixed-radix (CRT) steps:
//   X1 = x1s + (2^n+1)     * (2^(n-1) * (x1 - x1s) mod 2^n-1)       = X mod 2^2n-1
//   X2 = x2s + (2^(n+1)+1) * (2^n     * (x2 - x2s) mod 2^(n+1)-1)   = X mod 2^(2n+2)-1
// and then  parity = LSB(X2) xor LSB((X1 - X2) mod 2^2n-1).
// Datapath, following the paper's parity circuit:
//   - -x1s mod 2^n-1 from the (n+1)-bit residue: invert bits [n-1:0] and replace bit 0 by
//     XNOR(x1s[n], x1s[0]) (the value 2^n = 1 folds into bit 0); likewise for x2s;
//   - a modulo 2^n-1 adder forms x1 - x1s; multiplying by 2^(n-1) = 2^-1 is a rotate right
//     by one; the product by 2^n+1 is an (n+1)-bit add of the rotated value and x1s followed
//     by a 2n-bit add with the rotated value shifted up by n bits (right zero padding);
//   - the same on the (n+1)-bit side gives the (2n+2)-bit X2;
//   - X2 is reduced mod 2^2n-1 by adding X2[2n+1:2n] to X2[2n-1:0], inverted (additive
//     inverse mod 2^2n-1) and added to X1 in a modulo 2^2n-1 adder.
// The paper draws the X2 reduction as a plain 2n-bit add; here it is an end-around-carry
// adder, because X2[2n-1:0] + X2[2n+1:2n] can exceed 2n bits. All modulo 2^k-1 adders give
// the single-zero (canonical) result, without which the LSB of a zero difference would read 1.
//
// Interface: x must hold canonical residues; parity = X mod 2 for the X in [0, M) they encode.
module rns_parity
  import rns_pkg::*;
(
  input  rns_t x,
  output logic parity
);

  localparam int unsigned N2 = 2 * N;

  logic [N-1:0]    neg1s, d1, t1;
  logic [N:0]      sum1;
  logic [N2-1:0]   big1;
  logic [N:0]      neg2s, d2, t2;
  logic [N+1:0]    sum2;
  logic [N2+1:0]   big2;
  logic [N2-1:0]   big2_red, neg_big2, diff;

  // Left half: modulus pair 2^n-1, 2^n+1.
  assign neg1s = {~x.x1s[N-1:1], ~(x.x1s[N] ^ x.x1s[0])};
  rns_modadd_m1 #(.K(N)) u_d1 (.a(x.x1), .b(neg1s), .s(d1));
  assign t1   = {d1[0], d1[N-1:1]};                       // rotate right by 1
  assign sum1 = {1'b0, t1} + x.x1s;                       // n+1 bit add
  assign big1 = {t1, {N{1'b0}}} + N2'(sum1);              // 2n bit add -> X1

  // Right half: modulus pair 2^(n+1)-1, 2^(n+1)+1.
  assign neg2s = {~x.x2s[N:1], ~(x.x2s[N+1] ^ x.x2s[0])};
  rns_modadd_m1 #(.K(N + 1)) u_d2 (.a(x.x2), .b(neg2s), .s(d2));
  assign t2   = {d2[0], d2[N:1]};                         // rotate right by 1
  assign sum2 = {1'b0, t2} + x.x2s;                       // n+2 bit add
  assign big2 = {t2, {(N+1){1'b0}}} + (N2+2)'(sum2);      // 2n+2 bit add -> X2

  // X2 mod 2^2n-1, then X1 - X2 mod 2^2n-1.
  rns_modadd_m1 #(.K(N2)) u_red (
    .a(big2[N2-1:0]), .b({{(N2-2){1'b0}}, big2[N2+1:N2]}), .s(big2_red));
  assign neg_big2 = ~big2_red;
  rns_modadd_m1 #(.K(N2)) u_diff (.a(big1), .b(neg_big2), .s(diff));

  assign parity = diff[0] ^ big2[0];

endmodule
