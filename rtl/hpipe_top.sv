// hpipe_top: a layer-pipelined HPIPE accelerator for the head and the classifier of
// ResNet-50.
//
// Every operation of the network has its own hardware stage, and the stages are chained
// producer to consumer; all of them work at once on different lines of the image. The
// chain is the first operations of the optimised sparse ResNet-50 (batch normalisations
// already folded into convolutions and biases), followed by the classifier:
//
//   Placeholder -> Conv2D 7x7/2 -> BiasAdd -> MaxPool 3x3/2 -> Relu -+-> Conv2D 1x1 -> BiasAdd -> Relu -+
//                                                                    +-> Conv2D 1x1 ----------------------+-> Add
//   Add -> Relu -> Mean -> MatMul (Conv2D on a 1x1 input) -> BiasAdd -> out
//
// Between two stages a line travels as C beats of W activations (data + new_oc); every
// consumer with a buffer answers with coarse backpressure, and a stage with two consumers
// (the first Relu) sees the OR of both. The Add has one buffer per producer, both of the
// same depth since each path has exactly one buffered stage before it.
//
// Ports: the image enters serialised (height, width, channel) on host_data/host_valid/
// host_ready; the N_CLASSES logits leave one per beat on out_data/out_new_oc, and the
// receiver can hold off the next result with out_backpressure. Weights, weight-line counts
// and biases are loaded over cfg before the first image (layer ids: 1 conv1, 2 bias1,
// 3 branch conv, 4 branch bias, 5 shortcut conv, 6 classifier, 7 classifier bias).
//
// The default sizes are those of ResNet-50 on 224x224x3 ImageNet images. Which operations
// appear and in which order follows the paper's figure of the first ResNet-50 layers; the
// single 1x1 convolution on each path (the real bottleneck block has three on its main
// path) is a simplification of that figure, and the classifier tail, the SHIFT
// requantisation and N_SPLITS = 4 everywhere (the paper's compiler balances it per layer)
// are this design's choices.
module hpipe_top
  import hpipe_pkg::*;
#(
  parameter int unsigned IMG_W     = 224,
  parameter int unsigned IMG_H     = 224,
  parameter int unsigned IMG_C     = 3,
  parameter int unsigned C1        = 64,
  parameter int unsigned C2        = 256,
  parameter int unsigned N_CLASSES = 1000,
  parameter int unsigned NS_CONV1  = 4,
  parameter int unsigned NS_BLOCK  = 4,
  parameter int unsigned NS_FC     = 4,
  parameter int unsigned WB_CONV1  = 1024,
  parameter int unsigned WB_BLOCK  = 2048,
  parameter int unsigned WB_FC     = 16384,
  parameter int unsigned SHIFT     = 8,
  // derived sizes
  localparam int unsigned W1   = (IMG_W + 6 - 7) / 2 + 1,     // conv1, pad 3
  localparam int unsigned H1   = (IMG_H + 6 - 7) / 2 + 1,
  localparam int unsigned W2   = (W1 + 1) / 2,                // max pool, TensorFlow SAME
  localparam int unsigned H2   = (H1 + 1) / 2,
  localparam int unsigned MPW  = ((W2 - 1) * 2 + 3 > W1) ? (W2 - 1) * 2 + 3 - W1 : 0,
  localparam int unsigned MPH  = ((H2 - 1) * 2 + 3 > H1) ? (H2 - 1) * 2 + 3 - H1 : 0
) (
  input  logic clk,
  input  logic rst_n,
  input  cfg_t cfg,
  input  act_t host_data,
  input  logic host_valid,
  output logic host_ready,
  output act_t out_data [1],
  output logic out_new_oc,
  input  logic out_backpressure
);

  // stage outputs (data, new_oc) and the backpressure each stage receives
  act_t ph_d [IMG_W];  logic ph_v;
  act_t c1_d [W1];     logic c1_v, c1_bp;
  act_t b1_d [W1];     logic b1_v, b1_bp;
  act_t mp_d [W2];     logic mp_v, mp_bp;
  act_t r1_d [W2];     logic r1_v, r1_bp;
  act_t ca_d [W2];     logic ca_v, ca_bp;
  act_t ba_d [W2];     logic ba_v, ba_bp;
  act_t ra_d [W2];     logic ra_v, ra_bp;
  act_t cb_d [W2];     logic cb_v, cb_bp;
  act_t ad_d [W2];     logic ad_v, ad_bpa, ad_bpb;
  act_t r2_d [W2];     logic r2_v, r2_bp;
  act_t mn_d [1];      logic mn_v, mn_bp;
  act_t fc_d [1];      logic fc_v, fc_bp;
  logic                bf_bp;

  hpipe_placeholder #(.W(IMG_W), .C(IMG_C)) u_input (
    .clk, .rst_n, .host_data, .host_valid, .host_ready,
    .out_data(ph_d), .out_new_oc(ph_v), .out_backpressure(c1_bp));

  hpipe_conv #(.LAYER_ID(1), .W_IN(IMG_W), .H_IN(IMG_H), .C_IN(IMG_C), .C_OUT(C1),
    .KH(7), .KW(7), .STRIDE(2), .PAD_T(3), .PAD_B(3), .PAD_L(3), .PAD_R(3),
    .N_SPLITS(NS_CONV1), .WB_DEPTH(WB_CONV1), .SHIFT(SHIFT)) u_conv1 (
    .clk, .rst_n, .cfg, .in_data(ph_d), .in_new_oc(ph_v), .coarse_backpressure(c1_bp),
    .out_data(c1_d), .out_new_oc(c1_v), .out_backpressure(b1_bp));

  hpipe_bias_add #(.LAYER_ID(2), .W(W1), .C(C1)) u_bias1 (
    .clk, .rst_n, .cfg, .in_data(c1_d), .in_new_oc(c1_v), .coarse_backpressure(b1_bp),
    .out_data(b1_d), .out_new_oc(b1_v), .out_backpressure(mp_bp));

  hpipe_maxpool #(.W_IN(W1), .H_IN(H1), .C(C1), .KH(3), .KW(3), .STRIDE(2),
    .PAD_T(MPH / 2), .PAD_B(MPH - MPH / 2), .PAD_L(MPW / 2), .PAD_R(MPW - MPW / 2)) u_pool (
    .clk, .rst_n, .in_data(b1_d), .in_new_oc(b1_v), .coarse_backpressure(mp_bp),
    .out_data(mp_d), .out_new_oc(mp_v), .out_backpressure(r1_bp));

  hpipe_relu #(.W(W2)) u_relu1 (
    .clk, .rst_n, .in_data(mp_d), .in_new_oc(mp_v), .coarse_backpressure(r1_bp),
    .out_data(r1_d), .out_new_oc(r1_v), .out_backpressure(ca_bp || cb_bp));

  // main path
  hpipe_conv #(.LAYER_ID(3), .W_IN(W2), .H_IN(H2), .C_IN(C1), .C_OUT(C2),
    .KH(1), .KW(1), .STRIDE(1), .PAD_T(0), .PAD_B(0), .PAD_L(0), .PAD_R(0),
    .N_SPLITS(NS_BLOCK), .WB_DEPTH(WB_BLOCK), .SHIFT(SHIFT)) u_conv_a (
    .clk, .rst_n, .cfg, .in_data(r1_d), .in_new_oc(r1_v), .coarse_backpressure(ca_bp),
    .out_data(ca_d), .out_new_oc(ca_v), .out_backpressure(ba_bp));

  hpipe_bias_add #(.LAYER_ID(4), .W(W2), .C(C2)) u_bias_a (
    .clk, .rst_n, .cfg, .in_data(ca_d), .in_new_oc(ca_v), .coarse_backpressure(ba_bp),
    .out_data(ba_d), .out_new_oc(ba_v), .out_backpressure(ra_bp));

  hpipe_relu #(.W(W2)) u_relu_a (
    .clk, .rst_n, .in_data(ba_d), .in_new_oc(ba_v), .coarse_backpressure(ra_bp),
    .out_data(ra_d), .out_new_oc(ra_v), .out_backpressure(ad_bpa));

  // shortcut path
  hpipe_conv #(.LAYER_ID(5), .W_IN(W2), .H_IN(H2), .C_IN(C1), .C_OUT(C2),
    .KH(1), .KW(1), .STRIDE(1), .PAD_T(0), .PAD_B(0), .PAD_L(0), .PAD_R(0),
    .N_SPLITS(NS_BLOCK), .WB_DEPTH(WB_BLOCK), .SHIFT(SHIFT)) u_conv_b (
    .clk, .rst_n, .cfg, .in_data(r1_d), .in_new_oc(r1_v), .coarse_backpressure(cb_bp),
    .out_data(cb_d), .out_new_oc(cb_v), .out_backpressure(ad_bpb));

  hpipe_add #(.W(W2), .H(H2), .C(C2), .LINES_A(2), .LINES_B(2)) u_add (
    .clk, .rst_n,
    .a_data(ra_d), .a_new_oc(ra_v), .a_backpressure(ad_bpa),
    .b_data(cb_d), .b_new_oc(cb_v), .b_backpressure(ad_bpb),
    .out_data(ad_d), .out_new_oc(ad_v), .out_backpressure(r2_bp));

  hpipe_relu #(.W(W2)) u_relu2 (
    .clk, .rst_n, .in_data(ad_d), .in_new_oc(ad_v), .coarse_backpressure(r2_bp),
    .out_data(r2_d), .out_new_oc(r2_v), .out_backpressure(mn_bp));

  // classifier
  hpipe_mean #(.W(W2), .H(H2), .C(C2)) u_mean (
    .clk, .rst_n, .in_data(r2_d), .in_new_oc(r2_v), .coarse_backpressure(mn_bp),
    .out_data(mn_d), .out_new_oc(mn_v), .out_backpressure(fc_bp));

  hpipe_conv #(.LAYER_ID(6), .W_IN(1), .H_IN(1), .C_IN(C2), .C_OUT(N_CLASSES),
    .KH(1), .KW(1), .STRIDE(1), .PAD_T(0), .PAD_B(0), .PAD_L(0), .PAD_R(0),
    .N_SPLITS(NS_FC), .WB_DEPTH(WB_FC), .SHIFT(SHIFT)) u_fc (
    .clk, .rst_n, .cfg, .in_data(mn_d), .in_new_oc(mn_v), .coarse_backpressure(fc_bp),
    .out_data(fc_d), .out_new_oc(fc_v), .out_backpressure(bf_bp));

  hpipe_bias_add #(.LAYER_ID(7), .W(1), .C(N_CLASSES)) u_bias_fc (
    .clk, .rst_n, .cfg, .in_data(fc_d), .in_new_oc(fc_v), .coarse_backpressure(bf_bp),
    .out_data, .out_new_oc, .out_backpressure);

endmodule
