// tb_rns_mac: self-check of the RNS multiply-accumulate unit.
//
// Streams 300 dot products of random length (1..24) with random operands in [0, M), with idle
// cycles mixed in, and after each one checks that done pulses for the one cycle that follows
// the clock edge accepting the last pair (and never otherwise) and that acc equals sum(a*w) mod M computed in integers.
module tb_rns_mac;
  import rns_pkg::*;
  import tb_rns_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, first = 0, last = 0;
  rns_t a = '0, w = '0, acc;
  logic done;

  rns_mac dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .first(first), .last(last),
               .a(a), .w(w), .acc(acc), .done(done));

  always #5 clk = ~clk;

  task automatic check(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned ref_sum, x, y;
    int len;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int d = 0; d < 300; d++) begin
      len = int'($urandom_range(24, 1));
      ref_sum = 0;
      for (int i = 0; i < len; i++) begin
        // occasional idle cycle: acc must hold
        if ($urandom_range(3, 0) == 0) begin
          @(negedge clk);
          in_valid = 0;
          @(posedge clk); #1;
          check(longint'(done), 0, "done while idle");
        end
        x = rand_below(REF_M);
        y = rand_below(REF_M);
        if (d % 4 == 0) begin   // small signed operands, as in a 6-bit network
          x = enc_signed(longint'($urandom_range(63, 0)) - 32);
          y = enc_signed(longint'($urandom_range(63, 0)) - 32);
        end
        ref_sum = (ref_sum + (x * y) % REF_M) % REF_M;
        @(negedge clk);
        in_valid = 1; first = (i == 0); last = (i == len - 1);
        a = ref_rns(x); w = ref_rns(y);
        @(posedge clk); #1;
        check(longint'(done), longint'(i == len - 1), "done right after the last pair only");
      end
      check(longint'(acc), longint'(ref_rns(ref_sum)), "accumulated sum");
      @(negedge clk);
      in_valid = 0; first = 0; last = 0;
      @(posedge clk); #1;
      check(longint'(done), 0, "done is a single-cycle pulse");
      check(longint'(acc), longint'(ref_rns(ref_sum)), "sum held while idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
