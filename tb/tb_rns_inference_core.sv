// tb_rns_inference_core: end-to-end self-check of the RNS inference core at its default
// parameters (10 classes, 28-bit binary inputs).
//
// A run consists of hidden-layer neurons followed by final-layer groups of 10 neurons.
// Every (activation, weight) pair picks at random whether its activation enters as a binary
// number (through the residue generator) or already in RNS (bypassing it). Most neurons use
// small signed operands like a 6-bit network, some use operands drawn from the whole range
// so that the sum wraps modulo M. The testbench computes each dot product in integers and
// expects:
//   hidden neuron: act = ReLU(sum), act_clamped = (sum negative), act_valid in the cycle after
//                  the clock edge that follows the one accepting the last pair;
//   final group  : class_idx = index of the first largest signed sum, class_max its value,
//                  with the same latency after the group's last pair.
// It counts how often each mechanism occurred (binary conversion, RNS bypass, ReLU clamp,
// ReLU pass, back-to-back neurons, argmax replacing its running maximum, class results) and
// counts a failure for any that never occurred.
module tb_rns_inference_core;
  import rns_pkg::*;
  import tb_rns_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0, in_is_bin = 0, final_layer = 0;
  logic [27:0] in_bin = '0;
  rns_t in_rns = '0, in_w = '0;
  logic act_valid, act_clamped, class_valid;
  rns_t act, class_max;
  logic [3:0] class_idx;

  rns_inference_core dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_first(in_first), .in_last(in_last),
    .in_is_bin(in_is_bin), .in_bin(in_bin), .in_rns(in_rns), .in_w(in_w),
    .final_layer(final_layer), .act_valid(act_valid), .act(act), .act_clamped(act_clamped),
    .class_valid(class_valid), .class_idx(class_idx), .class_max(class_max));

  always #5 clk = ~clk;

  // Expected results, in order.
  typedef struct {
    longint unsigned value;
    logic            flag;      // clamped (hidden) / unused (final)
    int              idx;       // class index (final)
    longint          due;       // cycle in which the result must be visible
  } exp_t;
  exp_t exp_act[$], exp_cls[$];

  longint cycle = 0;
  int n_conv = 0, n_bypass = 0, n_clamp = 0, n_pass = 0, n_b2b = 0, n_replace = 0, n_class = 0;

  task automatic check(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d (cycle %0d)", what, got, exp, cycle);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Monitor: results must appear exactly in their due cycle.
  always @(posedge clk) begin
    cycle <= cycle + 1;
    #1;
    if (act_valid) begin
      if (exp_act.size() == 0) check(1, 0, "unexpected act_valid");
      else begin
        exp_t e;
        e = exp_act.pop_front();
        check(cycle, e.due, "act latency");
        check(longint'(act), longint'(ref_rns(e.value)), "ReLU activation");
        check(longint'(act_clamped), longint'(e.flag), "clamp flag");
        if (act_clamped) n_clamp++; else n_pass++;
      end
    end
    if (class_valid) begin
      if (exp_cls.size() == 0) check(1, 0, "unexpected class_valid");
      else begin
        exp_t e;
        e = exp_cls.pop_front();
        check(cycle, e.due, "class latency");
        check(longint'(class_idx), longint'(e.idx), "class index");
        check(longint'(class_max), longint'(ref_rns(e.value)), "class maximum");
        n_class++;
      end
    end
  end

  // Drive one neuron; returns its sum mod M.
  task automatic neuron(input bit fin, input bit wide, input bit idle_before,
                        output longint unsigned sum);
    int len;
    longint unsigned x, y;
    len = int'($urandom_range(12, 1));
    sum = 0;
    if (idle_before) begin
      @(negedge clk);
      in_valid = 0;
      repeat ($urandom_range(2, 0)) @(negedge clk);
    end else if (in_valid) n_b2b++;
    for (int i = 0; i < len; i++) begin
      bit as_bin;
      as_bin = ($urandom_range(1, 0) == 1);
      if (wide) begin
        x = as_bin ? rand_below(64'd1 << 28) : rand_below(REF_M);
        y = rand_below(REF_M);
      end else begin
        x = as_bin ? longint'($urandom_range(63, 0)) : enc_signed(longint'($urandom_range(63, 0)) - 32);
        y = enc_signed(longint'($urandom_range(63, 0)) - 32);
      end
      sum = (sum + (x * y) % REF_M) % REF_M;
      @(negedge clk);
      in_valid = 1; in_first = (i == 0); in_last = (i == len - 1);
      in_is_bin = as_bin; final_layer = fin;
      in_bin = as_bin ? 28'(x) : 28'($urandom);    // unused lane carries noise
      in_rns = as_bin ? ref_rns(rand_below(REF_M)) : ref_rns(x);
      in_w = ref_rns(y);
      if (as_bin) n_conv++; else n_bypass++;
    end
  endtask

  initial begin
    longint unsigned s;
    longint best, sv;
    int best_i;
    exp_t e;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int layer = 0; layer < 6; layer++) begin
      // hidden layer
      for (int nn = 0; nn < 20; nn++) begin
        neuron(1'b0, (nn % 5 == 4), ($urandom_range(2, 0) == 0), s);
        e.value = (s >= (REF_M + 1) / 2) ? 0 : s;
        e.flag  = (s >= (REF_M + 1) / 2);
        e.idx   = 0;
        e.due   = cycle + 2;    // set at the negedge before the accepting edge
        exp_act.push_back(e);
      end
      // final layer: one group of 10 neurons
      best = 0; best_i = 0;
      for (int c = 0; c < 10; c++) begin
        neuron(1'b1, (layer % 3 == 2), ($urandom_range(2, 0) == 0), s);
        sv = dec_signed(s);
        if (c == 0 || sv > best) begin
          if (c != 0) n_replace++;
          best = sv; best_i = c;
        end
      end
      e.value = enc_signed(best);
      e.flag  = 0;
      e.idx   = best_i;
      e.due   = cycle + 2;
      exp_cls.push_back(e);
    end
    @(negedge clk);
    in_valid = 0;
    repeat (6) @(posedge clk);
    #2;
    check(exp_act.size(), 0, "hidden results outstanding");
    check(exp_cls.size(), 0, "class results outstanding");
    $display("mechanisms: conversion=%0d bypass=%0d relu_clamp=%0d relu_pass=%0d back_to_back=%0d argmax_replace=%0d classes=%0d",
             n_conv, n_bypass, n_clamp, n_pass, n_b2b, n_replace, n_class);
    check(longint'(n_conv > 0),    1, "binary conversion never exercised");
    check(longint'(n_bypass > 0),  1, "RNS bypass never exercised");
    check(longint'(n_clamp > 0),   1, "ReLU clamp never exercised");
    check(longint'(n_pass > 0),    1, "ReLU pass never exercised");
    check(longint'(n_b2b > 0),     1, "back-to-back neurons never exercised");
    check(longint'(n_replace > 0), 1, "argmax replacement never exercised");
    check(longint'(n_class > 0),   1, "class result never produced");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
