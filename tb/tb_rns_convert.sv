// tb_rns_convert: self-check of the residue generator. Random 28-bit inputs, all-ones and
// single-bit inputs, and inputs whose chunks are all ones (the second code of zero) are
// converted; each residue is compared with the input's remainder by the modulus.
module tb_rns_convert;
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

  logic [27:0] bin;
  rns_t r;
  rns_convert dut (.bin(bin), .r(r));

  task automatic apply(input longint unsigned v);
    bin = 28'(v); #1;
    check(longint'(r.x1),  longint'(v % 127), "mod 127");
    check(longint'(r.x1s), longint'(v % 129), "mod 129");
    check(longint'(r.x2),  longint'(v % 255), "mod 255");
    check(longint'(r.x2s), longint'(v % 257), "mod 257");
  endtask

  initial begin
    apply(0);
    apply(28'hFFFFFFF);
    apply(28'h7F);
    apply(28'hFF);
    apply(28'hFFFC07F);
    for (int i = 0; i < 28; i++) apply(64'd1 << i);
    for (int t = 0; t < 30000; t++) apply(rand_below(64'd1 << 28));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
