// approx_cnn_conv: the convolutional part of the two-layer CNN with
// multiplier-interleaved kernels.
//
// Layer 1 has NK1 = 10 kernels of 3x3, layer 2 has NK2 = 12, which gives 22
// kernels and 198 multiplier slots (smaller counts are for simulation). SEQ assigns one of the nine FP32 multipliers to every
// slot (4-bit approx_pkg codes): slots 0..89 belong to layer 1 (kernel k,
// coefficient i at slot 9*k+i), slots 90..197 to layer 2. The default,
// approx_pkg::DEFAULT_SEQ, interleaves all eight approximate multipliers;
// any sequence, for instance a permutation of an optimised one, can be given
// through SEQ because the slots are fixed at elaboration like the
// pre-implemented multipliers they stand for.
//
// Each layer has its own streaming port: one 3x3 window per clock with
// 'first'/'last' marking the input channels of one output position, and the
// NK outputs valid one clock after 'last'. The feature-map buffering between
// the layers, pooling, activation and the classifier are outside this
// block, so layer 1's outputs and layer 2's inputs are ports.
module approx_cnn_conv
  import approx_pkg::*;
#(
  parameter int unsigned                       NK1 = L1_KERNELS,   // kernels of layer 1
  parameter int unsigned                       NK2 = L2_KERNELS,   // kernels of layer 2
  parameter logic [(NK1+NK2)*KSIZE*4-1:0]      SEQ = DEFAULT_SEQ[(NK1+NK2)*KSIZE*4-1:0]
) (
  input  logic  clk,
  input  logic  rst_n,
  // layer 1
  input  logic  l1_in_valid,
  input  logic  l1_first,
  input  logic  l1_last,
  input  fp32_t l1_window [KSIZE],
  input  fp32_t l1_weight [NK1][KSIZE],
  output logic  l1_out_valid,
  output fp32_t l1_out [NK1],
  // layer 2
  input  logic  l2_in_valid,
  input  logic  l2_first,
  input  logic  l2_last,
  input  fp32_t l2_window [KSIZE],
  input  fp32_t l2_weight [NK2][KSIZE],
  output logic  l2_out_valid,
  output fp32_t l2_out [NK2]
);

  localparam int unsigned L1_BITS = NK1 * KSIZE * 4;
  localparam int unsigned L2_BITS = NK2 * KSIZE * 4;

  conv_layer #(.NK(NK1), .SEQ(SEQ[0 +: L1_BITS])) u_layer1 (
    .clk(clk), .rst_n(rst_n),
    .in_valid(l1_in_valid), .first(l1_first), .last(l1_last),
    .window(l1_window), .weight(l1_weight),
    .out_valid(l1_out_valid), .out(l1_out)
  );

  conv_layer #(.NK(NK2), .SEQ(SEQ[L1_BITS +: L2_BITS])) u_layer2 (
    .clk(clk), .rst_n(rst_n),
    .in_valid(l2_in_valid), .first(l2_first), .last(l2_last),
    .window(l2_window), .weight(l2_weight),
    .out_valid(l2_out_valid), .out(l2_out)
  );

endmodule
