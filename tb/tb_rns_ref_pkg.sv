// tb_rns_ref_pkg: reference arithmetic for the RNS testbenches.
//
// Computes residues, modular results and signed interpretations directly with integer
// division and remainder, independently of the gate-level structures under test.
package tb_rns_ref_pkg;
  import rns_pkg::*;

  localparam longint unsigned REF_M = 64'd357886635;   // (2^14-1)(2^16-1)/3

  function automatic rns_t ref_rns(input longint unsigned v);
    rns_t r;
    r.x1  = 7'(v % 127);
    r.x1s = 8'(v % 129);
    r.x2  = 8'(v % 255);
    r.x2s = 9'(v % 257);
    return r;
  endfunction

  // Uniform-ish random integer in [0, lim).
  function automatic longint unsigned rand_below(input longint unsigned lim);
    longint unsigned v;
    v = {$urandom, $urandom};
    return v % lim;
  endfunction

  // Wrap-around encoding of a signed value.
  function automatic longint unsigned enc_signed(input longint s);
    return (s >= 0) ? longint'(s) : longint'(REF_M + s);
  endfunction

  // Signed value of an encoded number: values >= (M+1)/2 are negative.
  function automatic longint dec_signed(input longint unsigned v);
    return (v >= (REF_M + 1) / 2) ? longint'(v) - longint'(REF_M) : longint'(v);
  endfunction
endpackage
