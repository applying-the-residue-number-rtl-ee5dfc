// tb_rns_compare: self-check of the full comparator on random pairs, equal pairs, neighbours
// (B = A +/- 1) and the range ends. a_ge_b must equal (A >= B) for unsigned A, B in [0, M).
module tb_rns_compare;
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

  rns_t a, b;
  logic a_ge_b;
  rns_compare dut (.a(a), .b(b), .a_ge_b(a_ge_b));

  task automatic apply(input longint unsigned x, input longint unsigned y);
    a = ref_rns(x); b = ref_rns(y); #1;
    check(longint'(a_ge_b), longint'(x >= y), "compare");
  endtask

  initial begin
    longint unsigned x;
    apply(0, 0);
    apply(0, REF_M - 1);
    apply(REF_M - 1, 0);
    apply(REF_M - 1, REF_M - 1);
    for (int t = 0; t < 40000; t++) begin
      x = rand_below(REF_M - 2) + 1;
      apply(x, rand_below(REF_M));
      apply(x, x);
      apply(x, x + 1);
      apply(x + 1, x);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
