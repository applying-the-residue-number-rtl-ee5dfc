// tb_rns_mul: self-check of the RNS multiplier on random and corner-case operand pairs in [0, M).
// The expected residues are those of (A * B) mod M, computed with integer arithmetic.
module tb_rns_mul;
  import rns_pkg::*;
  import tb_rns_ref_pkg::*;
  int checks = 0, failures = 0;

  task automatic check(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  rns_t a, b, s;
  rns_mul dut (.a(a), .b(b), .p(s));

  initial begin
    longint unsigned x, y;
    for (int t = 0; t < 50000; t++) begin
      x = rand_below(REF_M);
      y = rand_below(REF_M);
      if (t == 0) begin x = REF_M - 1; y = REF_M - 1; end
      if (t == 1) begin x = 0; y = 0; end
      if (t == 2) begin x = 126; y = 1; end
      if (t == 3) begin x = 254; y = 1; end
      a = ref_rns(x); b = ref_rns(y); #1;
      check(longint'(s), longint'(ref_rns((x * y) % REF_M)), "mul");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
