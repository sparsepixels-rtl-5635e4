// sparse_cnn_top: a complete sparse CNN classifier for large, sparse single-channel images.
//
// Dataflow (each arrow is a register stage with a valid strobe):
//   dense image -> sparse_input_reduce (keep N_MAX active pixels)
//               -> sparse_conv (K1, C1 filters) -> sparse_relu -> sparse_avgpool (POOL1)
//               -> sparse_conv (K2, C2 filters) -> sparse_relu -> sparse_avgpool (POOL2)
//               -> sparse_flatten -> dense_layer (HIDDEN, ReLU) -> dense_layer (N_OUT)
// From the input reduction on, everything works on N_MAX slots of features and coordinates
// and is unrolled into parallel logic, so the latency and throughput are the same for every
// image. The layer sequence (two conv+ReLU blocks with average pooling, flattening, a
// 2-layer MLP) follows the published model family; the channel counts, kernel and pool
// sizes and hidden width are this design's choice (see sparsepixels_pkg).
//
// Weights and biases are inputs, to be held constant by the surrounding system (registers
// or a ROM with the trained, quantised values). Layouts: conv weight[pos][cout][cin] with
// pos = kh*K + kw; dense weight[out][in]; the flat vector is channel-last row-major.
//
// Timing: in_ready is high when the input reduction is idle; an image is taken on
// in_valid && in_ready. out_valid pulses N_MAX + 10 cycles after the accepting edge
// (N_MAX + 1 for the reduction, one per later layer). A new image can be taken every
// N_MAX + 1 cycles; the later layers are each one stage deep and never stall.
module sparse_cnn_top
  import sparsepixels_pkg::*;
#(
  parameter int unsigned H      = IMG_H,
  parameter int unsigned W      = IMG_W,
  parameter int unsigned CI     = IMG_C,
  parameter int unsigned N_MAX  = N_ACTIVE_MAX,
  parameter int unsigned KA     = K1,
  parameter int unsigned CA     = C1,
  parameter int unsigned PA     = POOL1,
  parameter int unsigned KB     = K2,
  parameter int unsigned CB     = C2,
  parameter int unsigned PB     = POOL2,
  parameter int unsigned NH     = HIDDEN,
  parameter int unsigned NO     = N_OUT,
  parameter int unsigned DW     = DATA_W,
  parameter int unsigned FRAC   = FRAC_W,
  // derived sizes
  parameter int unsigned H2     = (((H + PA - 1) / PA) + PB - 1) / PB,
  parameter int unsigned W2     = (((W + PA - 1) / PA) + PB - 1) / PB,
  parameter int unsigned NFLAT  = H2 * W2 * CB
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // image in
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic signed [DW-1:0] in_img    [H*W][CI],
  input  logic signed [DW-1:0] threshold,
  // trained parameters
  input  logic signed [DW-1:0] conv1_w   [KA*KA][CA][CI],
  input  logic signed [DW-1:0] conv1_b   [CA],
  input  logic signed [DW-1:0] conv2_w   [KB*KB][CB][CA],
  input  logic signed [DW-1:0] conv2_b   [CB],
  input  logic signed [DW-1:0] fc1_w     [NH][NFLAT],
  input  logic signed [DW-1:0] fc1_b     [NH],
  input  logic signed [DW-1:0] fc2_w     [NO][NH],
  input  logic signed [DW-1:0] fc2_b     [NO],
  // classifier out
  output logic                 out_valid,
  output logic signed [DW-1:0] out_logit [NO]
);

  localparam int unsigned CW = $clog2((H > W ? H : W) + 1);

  // sparse stream stages
  logic                 v0, v1, v2, v3, v4, v5, v6, v7, v8;
  logic signed [DW-1:0] f0 [N_MAX][CI];
  logic signed [DW-1:0] f1 [N_MAX][CA];
  logic signed [DW-1:0] f2 [N_MAX][CA];
  logic signed [DW-1:0] f3 [N_MAX][CA];
  logic signed [DW-1:0] f4 [N_MAX][CB];
  logic signed [DW-1:0] f5 [N_MAX][CB];
  logic signed [DW-1:0] f6 [N_MAX][CB];
  logic [CW-1:0] h0 [N_MAX], h1 [N_MAX], h2 [N_MAX], h3 [N_MAX], h4 [N_MAX], h5 [N_MAX], h6 [N_MAX];
  logic [CW-1:0] w0 [N_MAX], w1 [N_MAX], w2 [N_MAX], w3 [N_MAX], w4 [N_MAX], w5 [N_MAX], w6 [N_MAX];
  logic signed [DW-1:0] flat   [NFLAT];
  logic signed [DW-1:0] hidden [NH];

  sparse_input_reduce #(.H(H), .W(W), .C(CI), .N_MAX(N_MAX), .DW(DW), .COORD_W(CW)) u_reduce (
    .clk, .rst_n, .in_valid, .in_ready, .in_img, .threshold,
    .out_valid(v0), .out_feat(f0), .out_h(h0), .out_w(w0));

  sparse_conv #(.N(N_MAX), .CIN(CI), .COUT(CA), .K(KA), .DW(DW), .FRAC(FRAC), .COORD_W(CW)) u_conv1 (
    .clk, .rst_n, .in_valid(v0), .in_feat(f0), .in_h(h0), .in_w(w0),
    .weight(conv1_w), .bias(conv1_b),
    .out_valid(v1), .out_feat(f1), .out_h(h1), .out_w(w1));

  sparse_relu #(.N(N_MAX), .C(CA), .DW(DW), .COORD_W(CW)) u_relu1 (
    .clk, .rst_n, .in_valid(v1), .in_feat(f1), .in_h(h1), .in_w(w1),
    .out_valid(v2), .out_feat(f2), .out_h(h2), .out_w(w2));

  sparse_avgpool #(.N(N_MAX), .C(CA), .P(PA), .DW(DW), .COORD_W(CW)) u_pool1 (
    .clk, .rst_n, .in_valid(v2), .in_feat(f2), .in_h(h2), .in_w(w2),
    .out_valid(v3), .out_feat(f3), .out_h(h3), .out_w(w3));

  sparse_conv #(.N(N_MAX), .CIN(CA), .COUT(CB), .K(KB), .DW(DW), .FRAC(FRAC), .COORD_W(CW)) u_conv2 (
    .clk, .rst_n, .in_valid(v3), .in_feat(f3), .in_h(h3), .in_w(w3),
    .weight(conv2_w), .bias(conv2_b),
    .out_valid(v4), .out_feat(f4), .out_h(h4), .out_w(w4));

  sparse_relu #(.N(N_MAX), .C(CB), .DW(DW), .COORD_W(CW)) u_relu2 (
    .clk, .rst_n, .in_valid(v4), .in_feat(f4), .in_h(h4), .in_w(w4),
    .out_valid(v5), .out_feat(f5), .out_h(h5), .out_w(w5));

  sparse_avgpool #(.N(N_MAX), .C(CB), .P(PB), .DW(DW), .COORD_W(CW)) u_pool2 (
    .clk, .rst_n, .in_valid(v5), .in_feat(f5), .in_h(h5), .in_w(w5),
    .out_valid(v6), .out_feat(f6), .out_h(h6), .out_w(w6));

  sparse_flatten #(.N(N_MAX), .H(H2), .W(W2), .C(CB), .DW(DW), .COORD_W(CW)) u_flatten (
    .clk, .rst_n, .in_valid(v6), .in_feat(f6), .in_h(h6), .in_w(w6),
    .out_valid(v7), .out_flat(flat));

  dense_layer #(.N_IN(NFLAT), .N_O(NH), .RELU(1'b1), .DW(DW), .FRAC(FRAC)) u_fc1 (
    .clk, .rst_n, .in_valid(v7), .in_x(flat), .weight(fc1_w), .bias(fc1_b),
    .out_valid(v8), .out_y(hidden));

  dense_layer #(.N_IN(NH), .N_O(NO), .RELU(1'b0), .DW(DW), .FRAC(FRAC)) u_fc2 (
    .clk, .rst_n, .in_valid(v8), .in_x(hidden), .weight(fc2_w), .bias(fc2_b),
    .out_valid(out_valid), .out_y(out_logit));

endmodule
