// rns_convert: residue generator, binary integer to RNS (forward conversion).
//
// The binary weights 2^i repeat modulo each modulus: 2^K = 1 (mod 2^K-1) and
// 2^K = -1 (mod 2^K+1). The input word is therefore cut into K-bit chunks; for 2^K-1 every
// chunk is added with weight +1, for 2^K+1 chunk j is added with weight (-1)^j (its additive
// inverse is taken for odd j). The chunks are summed by a tree of modulo adders
// (rns_residue_tree), one tree per modulus, all four in parallel. Folding and the modulo-adder
// tree follow the paper; the input width, the mapping of an all-ones chunk to zero before it
// enters a 2^K-1 tree (the two codes of zero), and the tree shape are this design's choices.
//
// Interface: purely combinational. bin is an unsigned integer of IN_W bits (default 28 bits,
// the width of the RNS range M); r holds its residues, r = bin mod M residue by residue.
module rns_convert
  import rns_pkg::*;
#(
  parameter int unsigned IN_W = BIN_W
) (
  input  logic [IN_W-1:0] bin,
  output rns_t            r
);

  localparam int unsigned C1 = (IN_W + W1 - 1) / W1;     // chunks of n bits
  localparam int unsigned C2 = (IN_W + W2 - 1) / W2;     // chunks of n+1 bits
  localparam int unsigned P1 = 1 << $clog2(C1);
  localparam int unsigned P2 = 1 << $clog2(C2);

  logic [C1*W1-1:0] bin1;
  logic [C2*W2-1:0] bin2;
  logic [W1:0] ch1m [P1];
  logic [W1:0] ch1p [P1];
  logic [W2:0] ch2m [P2];
  logic [W2:0] ch2p [P2];
  logic [W1:0] s1m, s1p;
  logic [W2:0] s2m, s2p;

  // Chunk for a 2^k-1 tree: an all-ones chunk is the second code of zero.
  function automatic logic [W2:0] chunk_m(input logic [W2-1:0] c, input int unsigned k);
    logic [W2-1:0] ones;
    ones = W2'((1 << k) - 1);
    return (c == ones) ? '0 : {1'b0, c};
  endfunction

  // Chunk for a 2^k+1 tree: odd chunks enter as their additive inverse 2^k+1-c.
  function automatic logic [W2:0] chunk_p(input logic [W2-1:0] c, input int unsigned k,
                                          input bit negate);
    logic [W2+1:0] d;
    d = (W2+2)'((1 << k) + 1) - (W2+2)'(c);
    return (!negate || c == '0) ? {1'b0, c} : d[W2:0];
  endfunction

  always_comb begin
    bin1 = (C1*W1)'(bin);
    bin2 = (C2*W2)'(bin);
    for (int unsigned j = 0; j < P1; j++) begin
      if (j < C1) begin
        ch1m[j] = (W1+1)'(chunk_m(W2'(bin1[j*W1 +: W1]), W1));
        ch1p[j] = (W1+1)'(chunk_p(W2'(bin1[j*W1 +: W1]), W1, j[0]));
      end else begin
        ch1m[j] = '0;
        ch1p[j] = '0;
      end
    end
    for (int unsigned j = 0; j < P2; j++) begin
      if (j < C2) begin
        ch2m[j] = chunk_m(bin2[j*W2 +: W2], W2);
        ch2p[j] = chunk_p(bin2[j*W2 +: W2], W2, j[0]);
      end else begin
        ch2m[j] = '0;
        ch2p[j] = '0;
      end
    end
  end

  rns_residue_tree #(.K(W1), .PLUS(1'b0), .NP(P1)) u_t1m (.in(ch1m), .sum(s1m));
  rns_residue_tree #(.K(W1), .PLUS(1'b1), .NP(P1)) u_t1p (.in(ch1p), .sum(s1p));
  rns_residue_tree #(.K(W2), .PLUS(1'b0), .NP(P2)) u_t2m (.in(ch2m), .sum(s2m));
  rns_residue_tree #(.K(W2), .PLUS(1'b1), .NP(P2)) u_t2p (.in(ch2p), .sum(s2p));

  assign r.x1  = s1m[W1-1:0];
  assign r.x1s = s1p;
  assign r.x2  = s2m[W2-1:0];
  assign r.x2s = s2p;

endmodule
