// tb_rns_modmul_p1: self-check of rns_modmul_p1 (multiplication modulo 2^K+1).
//
// K = 7 and K = 8 (the residue widths of the default moduli set) are checked exhaustively
// over every pair of residues; K = 9 is checked on random pairs plus corner cases. The
// expected value is computed with integer arithmetic in the testbench.
module tb_rns_modmul_p1;
  int checks = 0, failures = 0;

  logic [8-1:0] a7, b7, s7;
  logic [9-1:0] a8, b8, s8;
  logic [10-1:0] ab, bb, sb;

  rns_modmul_p1 #(.K(7))  dut7 (.x(a7), .y(b7), .p(s7));
  rns_modmul_p1 #(.K(8))  dut8 (.x(a8), .y(b8), .p(s8));
  rns_modmul_p1 #(.K(9)) dutb (.x(ab), .y(bb), .p(sb));

  task automatic check(input longint got, input longint exp, input string what,
                       input longint i, input longint j);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: %0d op %0d got %0d expected %0d", what, i, j, got, exp);
    end
  endtask

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint m7, m8, mb;
    m7 = (64'd1 << 7) + 1;
    m8 = (64'd1 << 8) + 1;
    mb = (64'd1 << 9) + 1;
    for (longint i = 0; i < m7; i++)
      for (longint j = 0; j < m7; j++) begin
        a7 = 8'(i); b7 = 8'(j); #1;
        check(longint'(s7), (i * j) % m7, "K=7", i, j);
      end
    for (longint i = 0; i < m8; i++)
      for (longint j = 0; j < m8; j++) begin
        a8 = 9'(i); b8 = 9'(j); #1;
        check(longint'(s8), (i * j) % m8, "K=8", i, j);
      end
    for (int t = 0; t < 20000; t++) begin
      longint i, j;
      i = longint'($urandom) % mb;
      j = longint'($urandom) % mb;
      case (t)
        0: begin i = mb - 1; j = mb - 1; end
        1: begin i = 0;      j = 0;      end
        2: begin i = 1;      j = mb - 2; end
        3: begin i = mb - 1; j = 1;      end
        default: ;
      endcase
      ab = 10'(i); bb = 10'(j); #1;
      check(longint'(sb), (i * j) % mb, "K=9", i, j);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
