// tb_rns_argmax: self-check of the final-layer argmax.
//
// Streams 400 groups of N_CLASSES = 10 signed values (wrap-around encoded; random over the
// whole signed range, small values, or with deliberate ties) with random idle cycles. idx_valid
// must pulse in the cycle following the clock edge that accepts the tenth value with the index of the first
// largest value (signed order) and that value. The number of maximum updates is also counted.
module tb_rns_argmax;
  import rns_pkg::*;
  import tb_rns_ref_pkg::*;

  int checks = 0, failures = 0;
  int updates = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  rns_t value = '0, max_val;
  logic idx_valid, updated;
  logic [3:0] idx;

  rns_argmax #(.N_CLASSES(10)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .value(value),
    .idx_valid(idx_valid), .idx(idx), .max_val(max_val), .updated(updated));

  always #5 clk = ~clk;
  always @(posedge clk) if (updated) updates++;

  task automatic check(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint s, best;
    int best_i;
    longint unsigned enc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 400; g++) begin
      best = 0; best_i = 0;
      for (int i = 0; i < 10; i++) begin
        case (g % 3)
          0: s = dec_signed(rand_below(REF_M));
          1: s = longint'($urandom_range(2000, 0)) - 1000;
          default: s = longint'($urandom_range(4, 0)) - 2;   // many ties
        endcase
        if (i == 0 || s > best) begin best = s; best_i = i; end
        if ($urandom_range(3, 0) == 0) begin
          @(negedge clk); in_valid = 0;
          @(posedge clk); #1;
          check(longint'(idx_valid), 0, "idx_valid while idle");
        end
        enc = enc_signed(s);
        @(negedge clk);
        in_valid = 1; value = ref_rns(enc);
        @(posedge clk); #1;
        check(longint'(idx_valid), longint'(i == 9), "idx_valid right after the tenth value only");
      end
      check(longint'(idx), longint'(best_i), "argmax index");
      check(longint'(max_val), longint'(ref_rns(enc_signed(best))), "argmax value");
      @(negedge clk); in_valid = 0;
      @(posedge clk); #1;
      check(longint'(idx_valid), 0, "idx_valid is a single-cycle pulse");
    end
    checks++;
    if (updates <= 400) begin
      failures++;
      $display("FAIL: maximum never replaced within a group");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
