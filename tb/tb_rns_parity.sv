// tb_rns_parity: self-check of the parity unit. For random X in [0, M), the first and last
// thousand values of the range, and the multiples of the moduli products, the parity computed
// from the residues must equal X mod 2.
module tb_rns_parity;
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

  rns_t x;
  logic parity;
  rns_parity dut (.x(x), .parity(parity));

  task automatic apply(input longint unsigned v);
    x = ref_rns(v); #1;
    check(longint'(parity), longint'(v % 2), "parity");
  endtask

  initial begin
    for (longint unsigned v = 0; v < 1000; v++) apply(v);
    for (longint unsigned v = REF_M - 1000; v < REF_M; v++) apply(v);
    for (longint unsigned k = 1; k < 20; k++) begin
      apply(k * 16383);
      apply(k * 65535);
      apply(k * 16383 - 1);
      apply(k * 65535 + 1);
    end
    for (int t = 0; t < 100000; t++) apply(rand_below(REF_M));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
