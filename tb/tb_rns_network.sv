// tb_rns_network: a small integer network run end to end through the RNS inference core.
//
// The network has 6-bit signed weights ([-32, 31]) and 6-bit unsigned input pixels
// ([0, 63]), like the 6-bit integer networks RNS inference is aimed at:
//   hidden layer: N_HID neurons, each a dot product over N_IN binary pixels, then ReLU;
//   final layer : 10 neurons over the N_HID hidden activations, then argmax.
// The pixels enter in binary and pass through the residue generator. The hidden activations
// come back out of the core in RNS, and the testbench feeds them, unchanged, into the final
// layer (RNS bypass). The same network is evaluated with ordinary integers in the testbench,
// and for each of IMAGES random images the class index and the winning sum must agree.
// Sums stay inside the signed range: 16 * (64*63*32) * 32 < (M-1)/2.
module tb_rns_network;
  import rns_pkg::*;
  import tb_rns_ref_pkg::*;

  localparam int N_IN = 64, N_HID = 16, N_OUT = 10, IMAGES = 12;

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

  int w1 [N_HID][N_IN];
  int w2 [N_OUT][N_HID];
  int px [N_IN];
  rns_t hid_rns [N_HID];
  int n_hid_seen;

  // Collect hidden activations as they leave the core.
  always @(posedge clk) begin
    #1;
    if (act_valid && n_hid_seen < N_HID) begin
      hid_rns[n_hid_seen] = act;
      n_hid_seen++;
    end
  end

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
    longint hid [N_HID];
    longint s, best;
    int best_i, clamped;
    for (int h = 0; h < N_HID; h++)
      for (int i = 0; i < N_IN; i++) w1[h][i] = int'($urandom_range(63, 0)) - 32;
    for (int o = 0; o < N_OUT; o++)
      for (int h = 0; h < N_HID; h++) w2[o][h] = int'($urandom_range(63, 0)) - 32;
    repeat (3) @(posedge clk);
    rst_n = 1;
    clamped = 0;
    for (int img = 0; img < IMAGES; img++) begin
      for (int i = 0; i < N_IN; i++) px[i] = int'($urandom_range(63, 0));
      // integer reference
      for (int h = 0; h < N_HID; h++) begin
        s = 0;
        for (int i = 0; i < N_IN; i++) s += longint'(w1[h][i]) * px[i];
        if (s < 0) clamped++;
        hid[h] = (s < 0) ? 0 : s;
      end
      best = 0; best_i = 0;
      for (int o = 0; o < N_OUT; o++) begin
        s = 0;
        for (int h = 0; h < N_HID; h++) s += longint'(w2[o][h]) * hid[h];
        if (o == 0 || s > best) begin best = s; best_i = o; end
      end
      // hidden layer through the core, pixels in binary
      n_hid_seen = 0;
      for (int h = 0; h < N_HID; h++)
        for (int i = 0; i < N_IN; i++) begin
          @(negedge clk);
          in_valid = 1; in_first = (i == 0); in_last = (i == N_IN - 1);
          in_is_bin = 1; final_layer = 0;
          in_bin = 28'(px[i]);
          in_w = ref_rns(enc_signed(w1[h][i]));
        end
      @(negedge clk);
      in_valid = 0;
      repeat (3) @(posedge clk);
      check(n_hid_seen, N_HID, "hidden activations produced");
      for (int h = 0; h < N_HID; h++)
        check(longint'(hid_rns[h]), longint'(ref_rns(hid[h])), "hidden activation");
      // final layer through the core, activations in RNS
      for (int o = 0; o < N_OUT; o++)
        for (int h = 0; h < N_HID; h++) begin
          @(negedge clk);
          in_valid = 1; in_first = (h == 0); in_last = (h == N_HID - 1);
          in_is_bin = 0; final_layer = 1;
          in_rns = hid_rns[h];
          in_w = ref_rns(enc_signed(w2[o][h]));
        end
      @(negedge clk);
      in_valid = 0;
      @(posedge clk); #1;
      check(longint'(class_valid), 1, "class result after the last final-layer neuron");
      check(longint'(class_idx), longint'(best_i), "class index");
      check(longint'(class_max), longint'(ref_rns(enc_signed(best))), "winning sum");
      repeat (2) @(posedge clk);
    end
    checks++;
    if (clamped == 0) begin
      failures++;
      $display("FAIL: no hidden neuron was negative");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
