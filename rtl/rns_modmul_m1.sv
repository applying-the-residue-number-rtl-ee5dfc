// rns_modmul_m1: modulo 2^K-1 multiplier.
//
// Three stages, as in the paper's multiplier architecture:
//   1. modulo partial-product generator: PP_i = x_i ? (y rotated left by i) : 0. Because
//      2^K = 1 (mod 2^K-1), the bits of y that a shift would push past bit K-1 fold back
//      to the bottom, so a partial product is a circular shift rather than a wider word.
//   2. end-around-carry carry-save adder: rows of full adders reduce the K partial
//      products to a redundant pair (P_C, P_S); the carry leaving bit K-1 of every row
//      re-enters at bit 0 of the next.
//   3. a modulo parallel-prefix adder (rns_modadd_m1) adds P_C and P_S.
// The full adders are arranged as a linear carry-save array (K-2 rows, one partial product
// added per row); the paper speaks of a tree and does not fix the arrangement, which changes
// depth but not the result. No row ever sees three all-ones words, so the final adder never
// receives two all-ones operands and its result is the canonical residue.
//
// Interface: purely combinational; x, y canonical residues (< 2^K-1); p = x*y mod (2^K-1).
module rns_modmul_m1 #(
  parameter int unsigned K = 7
) (
  input  logic [K-1:0] x,
  input  logic [K-1:0] y,
  output logic [K-1:0] p
);

  logic [K-1:0] pp [K];
  logic [K-1:0] ps, pc;

  function automatic logic [K-1:0] rotl(input logic [K-1:0] v, input int unsigned sh);
    logic [2*K-1:0] d;
    d = {v, v} << sh;
    return d[2*K-1 -: K];
  endfunction

  always_comb begin
    logic [K-1:0] maj;
    for (int unsigned i = 0; i < K; i++) begin
      pp[i] = x[i] ? rotl(y, i) : '0;
    end
    ps = pp[0];
    pc = pp[1];
    for (int unsigned i = 2; i < K; i++) begin
      maj = (ps & pc) | (ps & pp[i]) | (pc & pp[i]);
      ps  = ps ^ pc ^ pp[i];
      pc  = {maj[K-2:0], maj[K-1]};  // end-around carry
    end
  end

  rns_modadd_m1 #(.K(K)) u_final (.a(ps), .b(pc), .s(p));

endmodule
