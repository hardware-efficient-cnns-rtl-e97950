// tb_conv3x3_kernel: drives two 3x3 kernels with the same random windows:
// one with all nine slots exact, checked bit for bit against the reference
// model (conv_ref_pkg), and one with the default interleaved slot types,
// checked against the same reference within 1e-5 of the sum of |products|.
// Output positions have 1 to 5 input channels ('first' .. 'last'), idle
// cycles are mixed in at random, and the test checks that out_valid comes
// exactly one clock after each 'last' beat and never otherwise, that the
// accumulator holds during idle cycles, and that the interleaved kernel
// differs from the exact one for some outputs.
module tb_conv3x3_kernel;
  import approx_pkg::*;
  import fp_ref_pkg::*;
  import conv_ref_pkg::*;

  logic  clk = 1'b0, rst_n = 1'b0;
  logic  in_valid = 1'b0, first = 1'b0, last = 1'b0;
  fp32_t window [KSIZE], weight [KSIZE];
  logic  ov_e, ov_a;
  fp32_t out_e, out_a, acc_e, acc_a;

  int checks = 0, failures = 0, cycles = 0;
  int n_outputs = 0, n_multi = 0, n_idle = 0, n_differ = 0;

  conv3x3_kernel #(.SLOT_TYPES('0)) u_exact (
    .clk, .rst_n, .in_valid, .first, .last, .window, .weight,
    .out_valid(ov_e), .out(out_e), .acc(acc_e));
  conv3x3_kernel u_approx (
    .clk, .rst_n, .in_valid, .first, .last, .window, .weight,
    .out_valid(ov_a), .out(out_a), .acc(acc_a));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("WATCHDOG");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  fp32_t exp_q [$];
  real   bnd_q [$];
  int    exp_cycle [$];

  // Check outputs on every clock.
  always @(posedge clk) begin
    #1;
    if (rst_n) begin
      if (ov_e || ov_a) begin
        fp32_t want;
        real   bound, diff;
        checks += 3;
        if (exp_q.size() == 0) begin
          failures++; $display("FAIL unexpected out_valid");
        end else begin
          want = exp_q.pop_front(); bound = bnd_q.pop_front();
          if (exp_cycle.pop_front() != cycles) begin failures++; $display("FAIL out_valid timing"); end
          if (!(ov_e && ov_a)) begin failures++; $display("FAIL out_valid mismatch"); end
          if (out_e !== want) begin failures++; $display("FAIL exact out %h want %h", out_e, want); end
          diff = f2r(out_a) - f2r(want);
          if (diff < 0) diff = -diff;
          checks++;
          if (diff > 1.0e-5 * bound) begin failures++; $display("FAIL approx out %h want %h", out_a, want); end
          if (out_a != out_e) n_differ++;
          n_outputs++;
        end
      end
    end
  end

  initial begin
    foreach (window[i]) begin window[i] = '0; weight[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int o = 0; o < 300; o++) begin
      int    nch;
      fp32_t acc;
      real   bound, ab;
      nch = $urandom_range(1, 5);
      if (nch > 1) n_multi++;
      bound = 0.0;
      for (int ch = 0; ch < nch; ch++) begin
        fp32_t x [KSIZE], w [KSIZE], d;
        // idle cycle inside or between groups
        if ($urandom_range(0, 4) == 0) begin
          fp32_t held;
          in_valid <= 1'b0; first <= 1'b0; last <= 1'b0;
          @(posedge clk);
          held = acc_e;
          @(posedge clk);
          #1;
          checks++;
          if (acc_e !== held) begin failures++; $display("FAIL accumulator moved while idle"); end
          n_idle++;
        end
        foreach (x[i]) begin x[i] = rand_val(); w[i] = rand_val(); end
        d = window_dot(x, w, ab);
        acc = (ch == 0) ? d : fadd(acc, d);
        bound += ab;
        foreach (x[i]) begin window[i] <= x[i]; weight[i] <= w[i]; end
        in_valid <= 1'b1; first <= (ch == 0); last <= (ch == nch - 1);
        @(posedge clk);
        if (ch == nch - 1) begin
          exp_q.push_back(acc); bnd_q.push_back(bound); exp_cycle.push_back(cycles + 1);
        end
      end
    end
    in_valid <= 1'b0; first <= 1'b0; last <= 1'b0;
    repeat (4) @(posedge clk);
    checks += 4;
    if (exp_q.size() != 0) begin failures++; $display("FAIL missing outputs"); end
    if (n_multi == 0)  begin failures++; $display("FAIL no multi-channel output"); end
    if (n_idle == 0)   begin failures++; $display("FAIL no idle cycle"); end
    if (n_differ == 0) begin failures++; $display("FAIL interleaved kernel never differs from exact"); end
    $display("outputs=%0d multi-channel=%0d idle=%0d approx!=exact=%0d", n_outputs, n_multi, n_idle, n_differ);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
