// conv3x3_kernel: one 3x3 convolution kernel whose nine multiplier slots
// each hold their own FP32 multiplier type (multiplier-interleaved kernel).
//
// Slot i (row-major over the 3x3 window) multiplies window[i] by weight[i]
// with an fp32_approx_mul of type SLOT_TYPES[4*i +: 4] (approx_pkg code).
// The nine products go through an exact FP32 adder tree
//   ((p0+p1)+(p2+p3)) + ((p4+p5)+(p6+p7)), then + p8,
// and the window sum is added to a channel accumulator: 'first' starts a new
// output (accumulator := window sum), otherwise accumulator += window sum.
// A multi-channel layer feeds one window per input channel, the same slots
// being reused for every channel, and raises 'last' with the final one.
//
// Timing: one window per clock; 'out_valid' and 'out' appear one clock
// after the input beat that carried 'last'. 'acc' shows the running sum.
// Reset (active low, synchronous) clears the accumulator and out_valid.
//
// Following the paper: nine multiplier slots per 3x3 kernel, each with a
// fixed multiplier type from the pool, reused for every feature window. The
// adder tree order, the accumulation over channels and the handshake are
// this design's choice.
module conv3x3_kernel
  import approx_pkg::*;
#(
  parameter logic [KSIZE*4-1:0] SLOT_TYPES = DEFAULT_SEQ[KSIZE*4-1:0]
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  first,
  input  logic  last,
  input  fp32_t window [KSIZE],
  input  fp32_t weight [KSIZE],
  output logic  out_valid,
  output fp32_t out,
  output fp32_t acc
);

  fp32_t prod [KSIZE];

  for (genvar i = 0; i < KSIZE; i++) begin : g_slot
    fp32_approx_mul #(.MT(mul_type_e'(SLOT_TYPES[4*i +: 4]))) u_mul (
      .a(window[i]), .b(weight[i]), .y(prod[i])
    );
  end

  fp32_t s01, s23, s45, s67, s03, s47, s07, dot, acc_sum, acc_next;

  fp32_add u_a01 (.a(prod[0]), .b(prod[1]), .y(s01));
  fp32_add u_a23 (.a(prod[2]), .b(prod[3]), .y(s23));
  fp32_add u_a45 (.a(prod[4]), .b(prod[5]), .y(s45));
  fp32_add u_a67 (.a(prod[6]), .b(prod[7]), .y(s67));
  fp32_add u_a03 (.a(s01),     .b(s23),     .y(s03));
  fp32_add u_a47 (.a(s45),     .b(s67),     .y(s47));
  fp32_add u_a07 (.a(s03),     .b(s47),     .y(s07));
  fp32_add u_a08 (.a(s07),     .b(prod[8]), .y(dot));
  fp32_add u_acc (.a(acc),     .b(dot),     .y(acc_sum));

  assign acc_next = first ? dot : acc_sum;

  // An accumulation group is open between a 'first' beat and its 'last' beat.
  logic open_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc       <= '0;
      out       <= '0;
      out_valid <= 1'b0;
      open_q    <= 1'b0;
    end else begin
      out_valid <= in_valid && last;
      if (in_valid) begin
        acc    <= acc_next;
        open_q <= !last;
        if (last) out <= acc_next;
      end
    end
  end

  // A beat that does not start a group must continue an open one.
  assert property (@(posedge clk) disable iff (!rst_n) (in_valid && !first) |-> open_q)
    else $error("conv3x3_kernel: accumulation beat without a preceding 'first'");

endmodule
