// rns_argmax: index of the largest of N_CLASSES final-layer outputs, with one full comparator.
//
// The outputs arrive one per valid cycle, class 0 first. The unit keeps the largest value seen
// so far and its index; a new value replaces it only if it is strictly larger, so ties go to
// the lower index. The comparison is signed: both operands are shifted by (M-1)/2 in RNS
// adders, which maps the wrap-around signed range [-(M-1)/2, (M-1)/2] monotonically onto
// [0, M-1], before the unsigned full comparator (rns_compare) sees them. The use of the full
// comparator for the final maximum follows the paper; serial operation, the signed offset and
// the tie rule are this design's choices.
//
// Interface: in_valid qualifies value. After the N_CLASSES-th value, idx_valid pulses for one
// cycle with idx (the winning class) and max_val (its value). A new group starts automatically
// after each result. updated pulses with each value that became the new maximum (the first
// value of a group always does). Reset is asynchronous, active low.
module rns_argmax
  import rns_pkg::*;
#(
  parameter int unsigned N_CLASSES = 10,
  localparam int unsigned IDX_W = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  rns_t             value,
  output logic             idx_valid,
  output logic [IDX_W-1:0] idx,
  output rns_t             max_val,
  output logic             updated
);

  logic [IDX_W-1:0] count, best_idx;
  rns_t             best, best_off, value_off;
  logic             best_ge_value, take;

  rns_add     u_off_b (.a(best),  .b(SIGN_OFFSET), .s(best_off));
  rns_add     u_off_v (.a(value), .b(SIGN_OFFSET), .s(value_off));
  rns_compare u_cmp   (.a(best_off), .b(value_off), .a_ge_b(best_ge_value));

  assign take = in_valid && ((count == '0) || !best_ge_value);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count     <= '0;
      best      <= '0;
      best_idx  <= '0;
      idx_valid <= 1'b0;
      idx       <= '0;
      max_val   <= '0;
      updated   <= 1'b0;
    end else begin
      idx_valid <= 1'b0;
      updated   <= take;
      if (in_valid) begin
        if (take) begin
          best     <= value;
          best_idx <= count;
        end
        if (count == IDX_W'(N_CLASSES - 1)) begin
          count     <= '0;
          idx_valid <= 1'b1;
          idx       <= take ? count : best_idx;
          max_val   <= take ? value : best;
        end else begin
          count <= count + 1'b1;
        end
      end
    end
  end

endmodule
