// rns_modmul_p1: modulo 2^K+1 multiplier on residues in normal form ([0, 2^K], K+1 bits).
//
// Partial products follow the paper's formula for this modulus. Since 2^K = -1 (mod 2^K+1),
// shifting y left by i pushes its top i bits past bit K-1 where they count negatively; taking
// their one's complement turns the subtraction into an addition plus a constant:
//   PP_i = x_i ? { y[K-1-i:0], ~y[K-1:K-i] } : { 0...0, 1...1 (i ones) }.
// Selecting 2^i-1 when x_i = 0 makes the constant the same for every x, and summing gives
//   x*y = sum_i PP_i + (K+2)   (mod 2^K+1)   for x, y < 2^K.
// The partial products are reduced by a modulo carry-save array of K-bit rows. The carry that
// leaves bit K-1 of a row has weight 2^K = -1; it re-enters bit 0 inverted, since
// -c = ~c - 1, so each row's output pair exceeds its input sum by one. With K partial
// products and one constant word there are K-1 rows, so the constant word is
// (K+2) - (K-1) = 3, whatever K. The
// redundant pair (P_S, P_C) is added by a modulo 2^K+1 adder (rns_modadd_p1). The value 2^K
// (that is -1), which the K-bit partial products cannot express, is handled at the output:
// -1*y = -y, x*-1 = -x, -1*-1 = 1. The constant, the linear arrangement of the carry-save rows
// and the handling of 2^K are this design's choices.
//
// Interface: purely combinational; x, y in [0, 2^K]; p = x*y mod (2^K+1).
module rns_modmul_p1 #(
  parameter int unsigned K = 7
) (
  input  logic [K:0] x,
  input  logic [K:0] y,
  output logic [K:0] p
);

  localparam logic [K+1:0] MOD = (K+2)'((1 << K) + 1);

  logic [K-1:0] pp [K];
  logic [K-1:0] ps, pc;
  logic [K:0]   main;

  function automatic logic [K:0] neg(input logic [K:0] v);
    logic [K+1:0] d;
    d = MOD - {1'b0, v};
    return (v == '0) ? '0 : d[K:0];
  endfunction

  always_comb begin
    logic [K-1:0] maj;
    // Partial-product generator.
    for (int unsigned i = 0; i < K; i++) begin
      logic [2*K-1:0] d;
      d = {y[K-1:0], ~y[K-1:0]} << i;
      pp[i] = x[i] ? d[2*K-1 -: K] : K'((1 << i) - 1);
    end
    // Modulo carry-save array with inverted end-around carry.
    ps = K'(3);
    pc = pp[0];
    for (int unsigned i = 1; i < K; i++) begin
      maj = (ps & pc) | (ps & pp[i]) | (pc & pp[i]);
      ps  = ps ^ pc ^ pp[i];
      pc  = {maj[K-2:0], ~maj[K-1]};
    end
  end

  rns_modadd_p1 #(.K(K)) u_final (.a({1'b0, ps}), .b({1'b0, pc}), .s(main));

  // Operands equal to 2^K (= -1).
  always_comb begin
    unique case ({x[K], y[K]})
      2'b11:   p = (K+1)'(1);
      2'b10:   p = neg(y);
      2'b01:   p = neg(x);
      default: p = main;
    endcase
  end

endmodule
