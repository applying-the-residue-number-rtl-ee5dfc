// rns_residue_tree: balanced tree of modulo adders that sums NP residues of one modulus.
//
// Level l holds NP >> l partial sums; each node of level l+1 adds two neighbours of level l.
// PLUS = 0 selects modulo 2^K-1 adders (operands K bits wide), PLUS = 1 modulo 2^K+1 adders
// (K+1 bits). Both kinds require canonical operands. NP must be a power of two; callers pad
// with zeros. Used by the residue generator to add folded chunks of a binary word.
//
// Interface: purely combinational; sum = (in[0] + ... + in[NP-1]) mod (2^K -/+ 1).
module rns_residue_tree #(
  parameter int unsigned K    = 7,
  parameter bit          PLUS = 1'b0,
  parameter int unsigned NP   = 4
) (
  input  logic [K:0] in  [NP],   // for PLUS = 0 bit K must be zero
  output logic [K:0] sum
);

  localparam int unsigned LV = (NP > 1) ? $clog2(NP) : 0;

  // Node j of level l+1 adds nodes 2j and 2j+1 of level l (level 0 is the input array).
  for (genvar l = 0; l < LV; l++) begin : g_level
    for (genvar j = 0; j < (NP >> (l + 1)); j++) begin : g_node
      logic [K:0] a_op, b_op, s;
      if (l == 0) begin : g_in
        assign a_op = in[2*j];
        assign b_op = in[2*j+1];
      end else begin : g_up
        assign a_op = g_level[l-1].g_node[2*j].s;
        assign b_op = g_level[l-1].g_node[2*j+1].s;
      end
      if (PLUS) begin : g_p
        rns_modadd_p1 #(.K(K)) u_add (.a(a_op), .b(b_op), .s(s));
      end else begin : g_m
        logic [K-1:0] sm;
        rns_modadd_m1 #(.K(K)) u_add (.a(a_op[K-1:0]), .b(b_op[K-1:0]), .s(sm));
        assign s = {1'b0, sm};
      end
    end
  end

  if (LV == 0) begin : g_single
    assign sum = in[0];
  end else begin : g_root
    assign sum = g_level[LV-1].g_node[0].s;
  end

endmodule
