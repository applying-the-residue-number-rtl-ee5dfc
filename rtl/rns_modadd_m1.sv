// rns_modadd_m1: modulo 2^K-1 adder built as a parallel-prefix adder with end-around carry.
//
// Structure (as the paper's modulo parallel-prefix adder):
//   preprocessing  (g, p) = (a&b, a^b) per bit;
//   carry tree     log2(K) levels of "dot" operators (G,P) o (G',P') = (G | P&G', P&P')
//                  giving the group generate/propagate of every prefix [i:0];
//   modulo correction  one further row of dot operators folds the end-around carry back
//                  into every bit position, c_i = G[i:0] | P[i:0] & cin;
//   postprocessing s_i = p_i ^ c_(i-1), with c_(-1) = cin.
// For K = 7 this is three tree levels plus the correction row.
//
// The paper feeds back cin = cout = G[K-1:0]. That leaves 2^K-1 (all ones) as a second code
// for zero whenever a+b = 2^K-1. This design feeds back cin = G[K-1:0] | P[K-1:0] instead, so
// the all-propagate case is also incremented and wraps to 0: the output is always in
// [0, 2^K-2]. The comparator's parity logic needs this single-zero form. The carry tree is a
// Sklansky prefix tree; the exact wiring of the paper's 7-bit tree is this design's choice.
//
// Interface: purely combinational. a, b must be canonical residues (< 2^K-1).
module rns_modadd_m1 #(
  parameter int unsigned K = 7
) (
  input  logic [K-1:0] a,
  input  logic [K-1:0] b,
  output logic [K-1:0] s
);

  localparam int unsigned L = (K > 1) ? $clog2(K) : 1;

  logic [K-1:0] g0, p0;
  logic [K-1:0] gl [0:L];
  logic [K-1:0] pl [0:L];
  logic         cin;
  logic [K-1:0] c;

  always_comb begin
    g0 = a & b;
    p0 = a ^ b;
    gl[0] = g0;
    pl[0] = p0;
    // Sklansky prefix tree: at level l, bit i with bit (l-1) set combines with the last bit
    // of the block below it.
    for (int unsigned l = 1; l <= L; l++) begin
      for (int unsigned i = 0; i < K; i++) begin
        if (((i >> (l - 1)) & 1) == 1) begin
          int unsigned j;
          j = ((i >> (l - 1)) << (l - 1)) - 1;
          gl[l][i] = gl[l-1][i] | (pl[l-1][i] & gl[l-1][j]);
          pl[l][i] = pl[l-1][i] & pl[l-1][j];
        end else begin
          gl[l][i] = gl[l-1][i];
          pl[l][i] = pl[l-1][i];
        end
      end
    end
    // End-around carry, single-zero form.
    cin = gl[L][K-1] | pl[L][K-1];
    // Modulo correction row.
    for (int unsigned i = 0; i < K; i++) begin
      c[i] = gl[L][i] | (pl[L][i] & cin);
    end
    // Postprocessing.
    s[0] = p0[0] ^ cin;
    for (int unsigned i = 1; i < K; i++) begin
      s[i] = p0[i] ^ c[i-1];
    end
  end

endmodule
