// conv_layer: one convolutional layer built from NK multiplier-interleaved
// 3x3 kernels that all see the same feature window.
//
// Each clock with in_valid one 3x3 window (row-major, FP32) is broadcast to
// every kernel, kernel k multiplying it by its own nine weights
// weight[k][0..8]. Kernel k's multiplier slots take their types from
// SEQ[36*k +: 36], i.e. SEQ lists 4-bit approx_pkg codes slot by slot,
// kernel by kernel. 'first'/'last' delimit the input channels of one output
// position as in conv3x3_kernel; out[k] is the output-feature-map value of
// kernel k, valid one clock after the 'last' beat (out_valid).
//
// The number of kernels and the per-slot sequence follow the paper (10 and
// 12 kernels of 3x3, 198 slots in all); feeding all kernels of a layer in
// parallel from one window is this design's choice.
module conv_layer
  import approx_pkg::*;
#(
  parameter int unsigned           NK  = L1_KERNELS,
  parameter logic [NK*KSIZE*4-1:0] SEQ = DEFAULT_SEQ[NK*KSIZE*4-1:0]
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  first,
  input  logic  last,
  input  fp32_t window [KSIZE],
  input  fp32_t weight [NK][KSIZE],
  output logic  out_valid,
  output fp32_t out [NK]
);

  logic  kvalid [NK];

  for (genvar k = 0; k < NK; k++) begin : g_kernel
    conv3x3_kernel #(.SLOT_TYPES(SEQ[k*KSIZE*4 +: KSIZE*4])) u_kernel (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (in_valid),
      .first     (first),
      .last      (last),
      .window    (window),
      .weight    (weight[k]),
      .out_valid (kvalid[k]),
      .out       (out[k]),
      .acc       ()
    );
  end

  // All kernels run in lock step, so kernel 0 speaks for the layer.
  assign out_valid = kvalid[0];

endmodule
