// rns_modadd_p1: modulo 2^K+1 adder on residues in normal (not diminished-1) form.
//
// A residue mod 2^K+1 lies in [0, 2^K] and needs K+1 bits. The adder forms t = a + b in K+2
// bits and, in parallel, t - (2^K+1); the sign of that difference selects the corrected or
// uncorrected sum. The paper names two options for this modulus: diminished-1 operands, or a
// correction circuit at the output to account for the extra one of the end-around carry.
// This design takes the output-correction route in its plainest form (a compare-and-subtract)
// so that every block of the datapath sees residues in the same normal form.
//
// Interface: purely combinational; a, b in [0, 2^K]; s = (a + b) mod (2^K+1).
module rns_modadd_p1 #(
  parameter int unsigned K = 7
) (
  input  logic [K:0] a,
  input  logic [K:0] b,
  output logic [K:0] s
);

  localparam logic [K+1:0] MOD = (K+2)'((1 << K) + 1);

  logic [K+1:0] t;
  logic [K+2:0] d;

  always_comb begin
    t = {1'b0, a} + {1'b0, b};
    d = {1'b0, t} - {1'b0, MOD};
    s = d[K+2] ? t[K:0] : d[K:0];
  end

endmodule
