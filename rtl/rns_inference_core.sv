// rns_inference_core: neuron-serial RNS inference datapath.
//
// Strings the RNS blocks together the way an end-to-end RNS network evaluation uses them:
//   input  -> residue generator (rns_convert), only for binary activations, e.g. the
//             network's input image; activations already in RNS bypass it;
//   MAC    -> rns_mac multiplies each activation by its RNS weight and accumulates the
//             neuron's dot product modulo M;
//   hidden layer (final_layer = 0): the finished sum passes through the half-comparator
//             ReLU (rns_relu) and leaves as an RNS activation for the next layer;
//   final layer  (final_layer = 1): the finished sums of N_CLASSES neurons go to the
//             full-comparator argmax (rns_argmax), which returns the winning class index,
//             so the result never has to be converted back to binary.
// Weights and activations are streamed in by the caller, one pair per cycle; there is no
// on-chip weight or activation memory. The choice of blocks and the idea of ending with an
// RNS argmax instead of a reverse conversion follow the paper, which does not describe how
// the blocks are connected: the streaming interface, framing and latencies are this design's.
//
// Interface and timing:
//   in_valid, in_first, in_last frame one neuron: first marks its first (activation, weight)
//   pair, last its final pair. in_is_bin selects in_bin (IN_W-bit unsigned) over in_rns as the
//   activation. final_layer is sampled with the last pair.
//   act_valid pulses two cycles after the last pair of a hidden-layer neuron, with act (the
//   ReLU output) and act_clamped (1 if the sum was negative and was zeroed).
//   class_valid pulses two cycles after the last pair of the N_CLASSES-th final-layer
//   neuron, with class_idx and class_max (the winning sum). Reset is asynchronous, active low.
module rns_inference_core
  import rns_pkg::*;
#(
  parameter int unsigned N_CLASSES = 10,
  parameter int unsigned IN_W      = BIN_W,
  localparam int unsigned IDX_W    = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // activation / weight stream
  input  logic             in_valid,
  input  logic             in_first,
  input  logic             in_last,
  input  logic             in_is_bin,
  input  logic [IN_W-1:0]  in_bin,
  input  rns_t             in_rns,
  input  rns_t             in_w,
  input  logic             final_layer,
  // hidden-layer result
  output logic             act_valid,
  output rns_t             act,
  output logic             act_clamped,
  // final-layer result
  output logic             class_valid,
  output logic [IDX_W-1:0] class_idx,
  output rns_t             class_max
);

  rns_t conv, a_sel, acc, relu_y;
  logic mac_done, final_q, relu_neg;
  logic argmax_valid;

  // Forward conversion of binary activations.
  rns_convert #(.IN_W(IN_W)) u_conv (.bin(in_bin), .r(conv));
  assign a_sel = in_is_bin ? conv : in_rns;

  // Multiply-accumulate.
  rns_mac u_mac (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .first(in_first), .last(in_last),
    .a(a_sel), .w(in_w), .acc(acc), .done(mac_done));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) final_q <= 1'b0;
    else if (in_valid && in_last) final_q <= final_layer;
  end

  // Hidden layer: ReLU by half comparator, registered.
  rns_relu u_relu (.x(acc), .y(relu_y), .negative(relu_neg));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_valid   <= 1'b0;
      act         <= '0;
      act_clamped <= 1'b0;
    end else begin
      act_valid <= mac_done && !final_q;
      if (mac_done && !final_q) begin
        act         <= relu_y;
        act_clamped <= relu_neg;
      end
    end
  end

  // Final layer: argmax by full comparator.
  rns_argmax #(.N_CLASSES(N_CLASSES)) u_argmax (
    .clk(clk), .rst_n(rst_n), .in_valid(mac_done && final_q), .value(acc),
    .idx_valid(argmax_valid), .idx(class_idx), .max_val(class_max), .updated());

  assign class_valid = argmax_valid;

endmodule
