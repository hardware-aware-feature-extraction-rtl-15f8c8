// sp_encoder -- the shared SuperPoint encoder as a chain of streaming layers.
//
// Eight 3x3 convolutions in four blocks of two, with 64, 64, 64, 64, 128, 128,
// 128, 128 output channels, and a 2x2 max-pool after each of the first three
// blocks, so a 1 x W x H greyscale image becomes a 128 x W/8 x H/8 feature map.
// All weights and activations are 3-bit; the input pixel is 8-bit.
//
// The paper describes four blocks of two 3x3 convolutions with 2x2 pooling and
// an output of (128, W/8, H/8); three pools are what that output size needs,
// and the channel counts are those of the original SuperPoint network, whose
// structure the paper keeps unchanged. The per-layer folding (SIMD, PE) and
// the width converters between differently folded layers are this design's
// choices, set for ~5.53 M clocks per 640x480 frame in the slowest layer.
//
// Interface: input one pixel per word (valid/ready), output 16 channels per
// word, 8 words per feature-map pixel, raster order. W and H must be
// multiples of 8.
module sp_encoder
  import sp_pkg::*;
#(
  parameter int unsigned W = IMG_W,
  parameter int unsigned H = IMG_H
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [PIX_BITS-1:0]    in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [16*A_BITS-1:0]   out_data,
  input  wgt_wr_t                wgt,
  input  thr_wr_t                thr
);
  localparam int unsigned B = A_BITS;

  // stream signals between stages: s<k>_v / s<k>_r / s<k>_d
  logic s1_v, s1_r; logic [32*B-1:0] s1_d;   // conv1a out
  logic s2_v, s2_r; logic [64*B-1:0] s2_d;   // conv1b out
  logic s3_v, s3_r; logic [64*B-1:0] s3_d;   // pool1 out
  logic s4_v, s4_r; logic [16*B-1:0] s4_d;   // -> conv2a
  logic s5_v, s5_r; logic [32*B-1:0] s5_d;   // conv2a out
  logic s6_v, s6_r; logic [16*B-1:0] s6_d;   // -> conv2b
  logic s7_v, s7_r; logic [32*B-1:0] s7_d;   // conv2b out
  logic s8_v, s8_r; logic [32*B-1:0] s8_d;   // pool2 out
  logic s9_v, s9_r; logic [8*B-1:0]  s9_d;   // -> conv3a
  logic s10_v, s10_r; logic [32*B-1:0] s10_d; // conv3a out
  logic s11_v, s11_r; logic [16*B-1:0] s11_d; // -> conv3b
  logic s12_v, s12_r; logic [32*B-1:0] s12_d; // conv3b out
  logic s13_v, s13_r; logic [32*B-1:0] s13_d; // pool3 out
  logic s14_v, s14_r; logic [8*B-1:0]  s14_d; // -> conv4a
  logic s15_v, s15_r; logic [16*B-1:0] s15_d; // conv4a out
  logic s16_v, s16_r; logic [8*B-1:0]  s16_d; // -> conv4b

  // block 1: W x H
  conv_layer #(.W(W), .H(H), .CIN(1), .COUT(64), .SIMD(1), .PE(32), .IN_BITS(PIX_BITS), .LAYER(L_CONV1A)) u_conv1a (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid(s1_v), .out_ready(s1_r), .out_data(s1_d), .wgt, .thr);
  conv_layer #(.W(W), .H(H), .CIN(64), .COUT(64), .SIMD(32), .PE(64), .LAYER(L_CONV1B)) u_conv1b (
    .clk, .rst_n, .in_valid(s1_v), .in_ready(s1_r), .in_data(s1_d),
    .out_valid(s2_v), .out_ready(s2_r), .out_data(s2_d), .wgt, .thr);
  maxpool #(.W(W), .H(H), .C(64), .N(64)) u_pool1 (
    .clk, .rst_n, .in_valid(s2_v), .in_ready(s2_r), .in_data(s2_d),
    .out_valid(s3_v), .out_ready(s3_r), .out_data(s3_d));
  stream_dwc #(.IN_N(64), .OUT_N(16), .BITS(B)) u_dwc2a (
    .clk, .rst_n, .in_valid(s3_v), .in_ready(s3_r), .in_data(s3_d),
    .out_valid(s4_v), .out_ready(s4_r), .out_data(s4_d));

  // block 2: W/2 x H/2
  conv_layer #(.W(W/2), .H(H/2), .CIN(64), .COUT(64), .SIMD(16), .PE(32), .LAYER(L_CONV2A)) u_conv2a (
    .clk, .rst_n, .in_valid(s4_v), .in_ready(s4_r), .in_data(s4_d),
    .out_valid(s5_v), .out_ready(s5_r), .out_data(s5_d), .wgt, .thr);
  stream_dwc #(.IN_N(32), .OUT_N(16), .BITS(B)) u_dwc2b (
    .clk, .rst_n, .in_valid(s5_v), .in_ready(s5_r), .in_data(s5_d),
    .out_valid(s6_v), .out_ready(s6_r), .out_data(s6_d));
  conv_layer #(.W(W/2), .H(H/2), .CIN(64), .COUT(64), .SIMD(16), .PE(32), .LAYER(L_CONV2B)) u_conv2b (
    .clk, .rst_n, .in_valid(s6_v), .in_ready(s6_r), .in_data(s6_d),
    .out_valid(s7_v), .out_ready(s7_r), .out_data(s7_d), .wgt, .thr);
  maxpool #(.W(W/2), .H(H/2), .C(64), .N(32)) u_pool2 (
    .clk, .rst_n, .in_valid(s7_v), .in_ready(s7_r), .in_data(s7_d),
    .out_valid(s8_v), .out_ready(s8_r), .out_data(s8_d));
  stream_dwc #(.IN_N(32), .OUT_N(8), .BITS(B)) u_dwc3a (
    .clk, .rst_n, .in_valid(s8_v), .in_ready(s8_r), .in_data(s8_d),
    .out_valid(s9_v), .out_ready(s9_r), .out_data(s9_d));

  // block 3: W/4 x H/4
  conv_layer #(.W(W/4), .H(H/4), .CIN(64), .COUT(128), .SIMD(8), .PE(32), .LAYER(L_CONV3A)) u_conv3a (
    .clk, .rst_n, .in_valid(s9_v), .in_ready(s9_r), .in_data(s9_d),
    .out_valid(s10_v), .out_ready(s10_r), .out_data(s10_d), .wgt, .thr);
  stream_dwc #(.IN_N(32), .OUT_N(16), .BITS(B)) u_dwc3b (
    .clk, .rst_n, .in_valid(s10_v), .in_ready(s10_r), .in_data(s10_d),
    .out_valid(s11_v), .out_ready(s11_r), .out_data(s11_d));
  conv_layer #(.W(W/4), .H(H/4), .CIN(128), .COUT(128), .SIMD(16), .PE(32), .LAYER(L_CONV3B)) u_conv3b (
    .clk, .rst_n, .in_valid(s11_v), .in_ready(s11_r), .in_data(s11_d),
    .out_valid(s12_v), .out_ready(s12_r), .out_data(s12_d), .wgt, .thr);
  maxpool #(.W(W/4), .H(H/4), .C(128), .N(32)) u_pool3 (
    .clk, .rst_n, .in_valid(s12_v), .in_ready(s12_r), .in_data(s12_d),
    .out_valid(s13_v), .out_ready(s13_r), .out_data(s13_d));
  stream_dwc #(.IN_N(32), .OUT_N(8), .BITS(B)) u_dwc4a (
    .clk, .rst_n, .in_valid(s13_v), .in_ready(s13_r), .in_data(s13_d),
    .out_valid(s14_v), .out_ready(s14_r), .out_data(s14_d));

  // block 4: W/8 x H/8
  conv_layer #(.W(W/8), .H(H/8), .CIN(128), .COUT(128), .SIMD(8), .PE(16), .LAYER(L_CONV4A)) u_conv4a (
    .clk, .rst_n, .in_valid(s14_v), .in_ready(s14_r), .in_data(s14_d),
    .out_valid(s15_v), .out_ready(s15_r), .out_data(s15_d), .wgt, .thr);
  stream_dwc #(.IN_N(16), .OUT_N(8), .BITS(B)) u_dwc4b (
    .clk, .rst_n, .in_valid(s15_v), .in_ready(s15_r), .in_data(s15_d),
    .out_valid(s16_v), .out_ready(s16_r), .out_data(s16_d));
  conv_layer #(.W(W/8), .H(H/8), .CIN(128), .COUT(128), .SIMD(8), .PE(16), .LAYER(L_CONV4B)) u_conv4b (
    .clk, .rst_n, .in_valid(s16_v), .in_ready(s16_r), .in_data(s16_d),
    .out_valid, .out_ready, .out_data, .wgt, .thr);

endmodule
