// rns_pkg: types and constants shared by the residue-number-system (RNS) datapath.
//
// An integer X in [0, M) is carried as four residues over the conjugate moduli set
// {2^n-1, 2^n+1, 2^(n+1)-1, 2^(n+1)+1}. With n = 7 the moduli are {127, 129, 255, 257},
// the residues take 7 + 8 + 8 + 9 = 32 bits, and M = (2^2n-1)(2^(2n+2)-1)/3 = 357886635,
// about the range of a 28-bit unsigned integer. The moduli set and n = 7 follow the paper;
// the field order inside the packed struct and the threshold constants are this design's.
//
// Signed values are held in wrap-around form: a negative v is stored as M + v, so the
// upper half of [0, M) encodes negatives. RELU_THR = (M+1)/2 is the smallest stored value
// that is treated as negative (the paper speaks of the threshold M/2, which is not an
// integer because M is odd).
package rns_pkg;

  parameter int unsigned N = 7;                   // the paper's n
  parameter int unsigned W1 = N;                  // residue width mod 2^n-1
  parameter int unsigned W1S = N + 1;             // residue width mod 2^n+1
  parameter int unsigned W2 = N + 1;              // residue width mod 2^(n+1)-1
  parameter int unsigned W2S = N + 2;             // residue width mod 2^(n+1)+1
  parameter int unsigned RNS_W = W1 + W1S + W2 + W2S;  // 32

  parameter longint unsigned MOD1  = (64'd1 << N) - 1;        // 127
  parameter longint unsigned MOD1S = (64'd1 << N) + 1;        // 129
  parameter longint unsigned MOD2  = (64'd1 << (N + 1)) - 1;  // 255
  parameter longint unsigned MOD2S = (64'd1 << (N + 1)) + 1;  // 257
  parameter longint unsigned M_RANGE = MOD1 * MOD1S * MOD2 * MOD2S / 3;  // 357886635

  // Width of a binary integer covering [0, M): 28 bits for n = 7.
  parameter int unsigned BIN_W = $clog2(M_RANGE);

  // x1 = X mod 2^n-1, x1s = X mod 2^n+1, x2 = X mod 2^(n+1)-1, x2s = X mod 2^(n+1)+1
  typedef struct packed {
    logic [W2S-1:0] x2s;
    logic [W2-1:0]  x2;
    logic [W1S-1:0] x1s;
    logic [W1-1:0]  x1;
  } rns_t;

  // Residues of a constant, for building fixed operands at elaboration time.
  function automatic rns_t rns_of(input longint unsigned v);
    rns_t r;
    r.x1  = W1'(v % MOD1);
    r.x1s = W1S'(v % MOD1S);
    r.x2  = W2'(v % MOD2);
    r.x2s = W2S'(v % MOD2S);
    return r;
  endfunction

  // Additive inverse of an RNS number, residue by residue: one's complement for the 2^k-1
  // residues (all ones is the second code of zero, accepted by the 2^k-1 adders as long as
  // the other operand is canonical), 2^k+1-x for the 2^k+1 residues.
  function automatic rns_t rns_neg(input rns_t v);
    rns_t r;
    r.x1  = ~v.x1;
    r.x2  = ~v.x2;
    r.x1s = (v.x1s == '0) ? '0 : W1S'(MOD1S - 64'(v.x1s));
    r.x2s = (v.x2s == '0) ? '0 : W2S'(MOD2S - 64'(v.x2s));
    return r;
  endfunction

  // Offset that maps signed values [-(M-1)/2, (M-1)/2] monotonically onto [0, M-1].
  parameter rns_t SIGN_OFFSET = rns_of((M_RANGE - 1) / 2);

  // ReLU threshold: stored values >= RELU_THR encode negative numbers.
  parameter longint unsigned RELU_THR = (M_RANGE + 1) / 2;
  // Additive inverse of the threshold, fed to the half comparator's subtractor.
  parameter rns_t NEG_RELU_THR = rns_of(M_RANGE - RELU_THR);
  // Parity of the threshold, precomputed for the half comparator.
  parameter logic RELU_THR_PARITY = RELU_THR[0];

endpackage
