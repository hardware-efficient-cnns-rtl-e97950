// tb_approx_cnn_conv: end-to-end test of the two convolutional layers with
// the default interleaved sequence, at a reduced kernel count (NK1 = 2 and
// NK2 = 3 kernels instead of 10 and 12, i.e. slots 0..17 and 18..44 of the
// sequence): the full-size model, 198 multipliers, takes too long to build
// for a routine regression. Every kernel of a layer has the same structure,
// so the reduced test covers each mechanism of the full one.
//
// Layer 1 is fed like the first layer of a CIFAR-10 network: every output
// position takes 3 input channels (R, G, B). Layer 2 is fed like the second
// layer: 10 input channels, one per layer-1 kernel. Both layers run at the
// same time with independent random idle cycles. Each output is compared
// with an exact reference (conv_ref_pkg) within 1e-5 of the sum of
// |products| of that output, and must appear one clock after its 'last'
// beat. The test counts, and requires at least once each: multi-channel
// accumulation in both layers, a single-channel output (first and last on
// one beat) in both layers, idle cycles inside a channel group, both layers
// delivering in the same clock, and an interleaved result that differs from
// the exact one (the approximate multipliers are in the path).
module tb_approx_cnn_conv;
  import approx_pkg::*;
  import fp_ref_pkg::*;
  import conv_ref_pkg::*;

  localparam int N_POS = 24;      // output positions per layer
  localparam int NK1 = 2;
  localparam int NK2 = 3;

  logic  clk = 1'b0, rst_n = 1'b0;
  logic  l1_in_valid = 1'b0, l1_first = 1'b0, l1_last = 1'b0;
  logic  l2_in_valid = 1'b0, l2_first = 1'b0, l2_last = 1'b0;
  fp32_t l1_window [KSIZE], l2_window [KSIZE];
  fp32_t l1_weight [NK1][KSIZE];
  fp32_t l2_weight [NK2][KSIZE];
  logic  l1_out_valid, l2_out_valid;
  fp32_t l1_out [NK1];
  fp32_t l2_out [NK2];

  int checks = 0, failures = 0, cycles = 0;
  int n_multi [2], n_single [2], n_idle [2], n_out [2], n_differ = 0, n_both = 0;
  bit done [2];

  approx_cnn_conv #(.NK1(NK1), .NK2(NK2)) dut (
    .clk, .rst_n,
    .l1_in_valid, .l1_first, .l1_last, .l1_window, .l1_weight, .l1_out_valid, .l1_out,
    .l2_in_valid, .l2_first, .l2_last, .l2_window, .l2_weight, .l2_out_valid, .l2_out);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin : watchdog
    repeat (4000) @(posedge clk);
    failures++;
    $display("WATCHDOG");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected results, per layer, in order
  typedef struct { fp32_t v [NK2]; real bound [NK2]; int cycle; } exp_t;
  exp_t exp_q1 [$], exp_q2 [$];

  task automatic fail(string msg);
    failures++;
    if (failures < 12) $display("FAIL %s (cycle %0d)", msg, cycles);
  endtask

  task automatic compare(int layer, exp_t e, fp32_t got [NK2], int nk);
    real diff;
    checks++;
    if (e.cycle != cycles) fail($sformatf("layer %0d output timing", layer));
    for (int k = 0; k < nk; k++) begin
      diff = f2r(got[k]) - f2r(e.v[k]);
      if (diff < 0) diff = -diff;
      checks++;
      if (diff > 1.0e-5 * e.bound[k]) fail($sformatf("layer %0d kernel %0d got %h want %h", layer, k, got[k], e.v[k]));
      if (got[k] != e.v[k]) n_differ++;
    end
  endtask

  always @(posedge clk) begin
    #1;
    if (rst_n) begin
      fp32_t g [NK2];
      if (l1_out_valid && l2_out_valid) n_both++;
      if (l1_out_valid) begin
        if (exp_q1.size() == 0) fail("layer 1 unexpected output");
        else begin
          foreach (g[k]) g[k] = (k < NK1) ? l1_out[k] : '0;
          compare(1, exp_q1.pop_front(), g, NK1);
          n_out[0]++;
        end
      end
      if (l2_out_valid) begin
        if (exp_q2.size() == 0) fail("layer 2 unexpected output");
        else begin
          foreach (g[k]) g[k] = l2_out[k];
          compare(2, exp_q2.pop_front(), g, NK2);
          n_out[1]++;
        end
      end
    end
  end

  // Drive one layer: N_POS output positions of 'nch_full' channels, with a
  // few single-channel positions mixed in.
  task automatic drive_layer(int layer);
    int nk, nch_full;
    nk       = (layer == 1) ? NK1 : NK2;
    nch_full = (layer == 1) ? 3 : 10;
    for (int o = 0; o < N_POS; o++) begin
      int   nch;
      exp_t e;
      nch = (o % 6 == 5) ? 1 : nch_full;
      if (nch == 1) n_single[layer-1]++; else n_multi[layer-1]++;
      for (int ch = 0; ch < nch; ch++) begin
        fp32_t x [KSIZE];
        fp32_t w [NK2][KSIZE];
        fp32_t d;
        real   ab;
        if (ch > 0 && $urandom_range(0, 5) == 0) begin
          if (layer == 1) l1_in_valid <= 1'b0; else l2_in_valid <= 1'b0;
          @(posedge clk);
          n_idle[layer-1]++;
        end
        foreach (x[i]) x[i] = rand_val();
        foreach (w[k, i]) w[k][i] = rand_val();
        for (int k = 0; k < nk; k++) begin
          d = window_dot(x, w[k], ab);
          e.v[k]     = (ch == 0) ? d : fadd(e.v[k], d);
          e.bound[k] = (ch == 0) ? ab : e.bound[k] + ab;
        end
        if (layer == 1) begin
          foreach (x[i]) l1_window[i] <= x[i];
          for (int k = 0; k < NK1; k++) foreach (w[k][i]) l1_weight[k][i] <= w[k][i];
          l1_in_valid <= 1'b1; l1_first <= (ch == 0); l1_last <= (ch == nch - 1);
        end else begin
          foreach (x[i]) l2_window[i] <= x[i];
          for (int k = 0; k < NK2; k++) foreach (w[k][i]) l2_weight[k][i] <= w[k][i];
          l2_in_valid <= 1'b1; l2_first <= (ch == 0); l2_last <= (ch == nch - 1);
        end
        @(posedge clk);
        if (ch == nch - 1) begin
          e.cycle = cycles + 1;
          if (layer == 1) exp_q1.push_back(e); else exp_q2.push_back(e);
        end
      end
    end
    if (layer == 1) l1_in_valid <= 1'b0; else l2_in_valid <= 1'b0;
    done[layer-1] = 1'b1;
  endtask

  initial begin
    foreach (n_out[i]) begin n_multi[i] = 0; n_single[i] = 0; n_idle[i] = 0; n_out[i] = 0; done[i] = 0; end
    foreach (l1_window[i]) begin l1_window[i] = '0; l2_window[i] = '0; end
    foreach (l1_weight[k, i]) l1_weight[k][i] = '0;
    foreach (l2_weight[k, i]) l2_weight[k][i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    fork
      drive_layer(1);
      drive_layer(2);
    join
    repeat (3) @(posedge clk);
    for (int l = 0; l < 2; l++) begin
      $display("layer %0d: outputs=%0d multi-channel=%0d single-channel=%0d idle=%0d",
               l + 1, n_out[l], n_multi[l], n_single[l], n_idle[l]);
      checks += 4;
      if (n_out[l] != N_POS) fail($sformatf("layer %0d delivered %0d outputs", l + 1, n_out[l]));
      if (n_multi[l] == 0)   fail("no multi-channel accumulation");
      if (n_single[l] == 0)  fail("no single-channel output");
      if (n_idle[l] == 0)    fail("no idle cycle inside a group");
    end
    $display("both layers in one clock=%0d, interleaved != exact: %0d values", n_both, n_differ);
    checks += 2;
    if (n_both == 0)   fail("layers never delivered in the same clock");
    if (n_differ == 0) fail("interleaved result never differs from exact");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
