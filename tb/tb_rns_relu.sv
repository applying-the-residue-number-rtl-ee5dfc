// tb_rns_relu: self-check of the half-comparator ReLU. Inputs X >= (M+1)/2 encode negative
// values and must give 0 with negative = 1; smaller inputs must pass unchanged. Random inputs
// and the neighbourhood of the threshold and of the range ends are applied.
module tb_rns_relu;
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

  rns_t x, y;
  logic negative;
  rns_relu dut (.x(x), .y(y), .negative(negative));

  task automatic apply(input longint unsigned v);
    logic neg;
    neg = (v >= (REF_M + 1) / 2);
    x = ref_rns(v); #1;
    check(longint'(negative), longint'(neg), "negative flag");
    check(longint'(y), neg ? 0 : longint'(ref_rns(v)), "relu output");
  endtask

  initial begin
    for (longint unsigned v = 0; v < 100; v++) apply(v);
    for (longint unsigned v = REF_M - 100; v < REF_M; v++) apply(v);
    for (longint unsigned v = (REF_M + 1) / 2 - 100; v < (REF_M + 1) / 2 + 100; v++) apply(v);
    for (int t = 0; t < 50000; t++) apply(rand_below(REF_M));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
