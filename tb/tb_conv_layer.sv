// tb_conv_layer: a layer of two all-exact kernels is checked bit for bit
// against the reference model, and a layer of three kernels with the
// default interleaved sequence is checked against the same
// reference within 1e-5 of the sum of |products|. Every kernel gets its own
// random weights, all see the same window; groups of 1 to 3 channels. The
// test checks the one-clock output timing and that each output channel
// carries its own kernel's result (a swapped or shared weight bank fails).
module tb_conv_layer;
  import approx_pkg::*;
  import fp_ref_pkg::*;
  import conv_ref_pkg::*;

  localparam int NKE = 2;   // all-exact layer
  localparam int NKD = 3;   // layer with the default interleaved sequence

  logic  clk = 1'b0, rst_n = 1'b0;
  logic  in_valid = 1'b0, first = 1'b0, last = 1'b0;
  fp32_t window [KSIZE];
  fp32_t weight_e [NKE][KSIZE];
  fp32_t weight_d [NKD][KSIZE];
  logic  ov_e, ov_d;
  fp32_t out_e [NKE];
  fp32_t out_d [NKD];

  int checks = 0, failures = 0, cycles = 0, n_outputs = 0, n_differ = 0;

  conv_layer #(.NK(NKE), .SEQ('0)) u_exact (
    .clk, .rst_n, .in_valid, .first, .last, .window, .weight(weight_e),
    .out_valid(ov_e), .out(out_e));
  conv_layer #(.NK(NKD)) u_default (
    .clk, .rst_n, .in_valid, .first, .last, .window, .weight(weight_d),
    .out_valid(ov_d), .out(out_d));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (window[i]) window[i] = '0;
    foreach (weight_d[k, i]) weight_d[k][i] = '0;
    foreach (weight_e[k, i]) weight_e[k][i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int o = 0; o < 60; o++) begin
      int    nch;
      fp32_t acc [NKD];
      real   bound [NKD];
      nch = $urandom_range(1, 3);
      for (int ch = 0; ch < nch; ch++) begin
        fp32_t x [KSIZE];
        fp32_t w [NKD][KSIZE];
        real   ab;
        fp32_t d;
        foreach (x[i]) x[i] = rand_val();
        foreach (w[k, i]) w[k][i] = rand_val();
        for (int k = 0; k < NKD; k++) begin
          d = window_dot(x, w[k], ab);
          acc[k]   = (ch == 0) ? d : fadd(acc[k], d);
          bound[k] = (ch == 0) ? ab : bound[k] + ab;
        end
        foreach (x[i]) window[i] <= x[i];
        foreach (w[k, i]) begin
          weight_d[k][i] <= w[k][i];
          if (k < NKE) weight_e[k][i] <= w[k][i];
        end
        in_valid <= 1'b1; first <= (ch == 0); last <= (ch == nch - 1);
        @(posedge clk);       // the layer takes the beat at this edge
        in_valid <= 1'b0;
        #1;
        checks++;
        if (ch < nch - 1 && (ov_e || ov_d)) begin failures++; $display("FAIL out_valid too early"); end
      end
      // results one clock after the 'last' beat
      checks += 2;
      if (!ov_e || !ov_d) begin failures++; $display("FAIL out_valid missing"); end
      for (int k = 0; k < NKE; k++) begin
        checks++;
        if (out_e[k] !== acc[k]) begin failures++; $display("FAIL exact kernel %0d got %h want %h", k, out_e[k], acc[k]); end
      end
      for (int k = 0; k < NKD; k++) begin
        real diff;
        diff = f2r(out_d[k]) - f2r(acc[k]);
        if (diff < 0) diff = -diff;
        checks++;
        if (diff > 1.0e-5 * bound[k]) begin failures++; $display("FAIL default kernel %0d got %h want %h", k, out_d[k], acc[k]); end
        if (out_d[k] != acc[k]) n_differ++;
      end
      n_outputs++;
      if ($urandom_range(0, 1) == 0) @(posedge clk);
    end
    checks++;
    if (n_differ == 0) begin failures++; $display("FAIL interleaved layer never differs from exact"); end
    $display("output positions=%0d approx!=exact=%0d", n_outputs, n_differ);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
