// rns_mac: RNS multiply-and-accumulate unit for one neuron (dot product of weights and
// activations), one product per clock.
//
// Each accepted pair (a, w) is multiplied residue-wise (rns_mul) and added to the running sum
// (rns_add); first restarts the sum with the current product. Because every residue channel
// is independent, there is no carry between channels and the sum simply wraps modulo M,
// which is how negative partial sums are represented. The MAC function comes from the paper;
// the single-cycle multiply-add, the first/last framing and the done pulse are this design's.
//
// Interface: in_valid qualifies a, w, first, last. acc holds the running sum from the clock
// edge after each accepted pair. done pulses for one cycle, in the cycle after the pair with
// last = 1 was accepted, when acc holds the complete dot product. Reset is asynchronous,
// active low, and clears acc and done.
module rns_mac
  import rns_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic first,
  input  logic last,
  input  rns_t a,
  input  rns_t w,
  output rns_t acc,
  output logic done
);

  rns_t prod, sum;

  rns_mul u_mul (.a(a), .b(w), .p(prod));
  rns_add u_add (.a(acc), .b(prod), .s(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc  <= '0;
      done <= 1'b0;
    end else begin
      done <= in_valid && last;
      if (in_valid) acc <= first ? prod : sum;
    end
  end

endmodule
