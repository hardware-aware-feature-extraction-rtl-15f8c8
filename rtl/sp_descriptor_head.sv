// sp_descriptor_head -- SuperPoint descriptor decoder, convolution part.
//
// A 3x3 convolution from 128 to 256 channels with ReLU, then a 1x1
// convolution to 256 channels that gives one coarse 256-element descriptor
// per 8x8 cell. The output layer has no ReLU, so its thresholds produce
// signed 3-bit codes (-4..3). The L2 normalisation, bilinear up-sampling and
// second normalisation that follow in SuperPoint are not part of this
// module; they work on this output.
//
// Interface: input 8 channels per word (16 words per cell), output 8
// descriptor elements per word, 32 words per cell, raster order over the
// W/8 x H/8 cells. Folding: 3x3 layer SIMD 8 / PE 32, 1x1 layer SIMD 8 / PE 8,
// about 5.53 M and 4.92 M clocks for a 640x480 frame.
module sp_descriptor_head
  import sp_pkg::*;
#(
  parameter int unsigned W = IMG_W,
  parameter int unsigned H = IMG_H
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [8*A_BITS-1:0]  in_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [8*A_BITS-1:0]  out_data,
  input  wgt_wr_t              wgt,
  input  thr_wr_t              thr
);
  localparam int unsigned B = A_BITS;
  logic a_v, a_r; logic [32*B-1:0] a_d;
  logic b_v, b_r; logic [8*B-1:0]  b_d;

  conv_layer #(.W(W/8), .H(H/8), .CIN(128), .COUT(256), .K(3), .SIMD(8), .PE(32), .LAYER(L_CONVDA)) u_convda (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid(a_v), .out_ready(a_r), .out_data(a_d), .wgt, .thr);
  stream_dwc #(.IN_N(32), .OUT_N(8), .BITS(B)) u_dwc (
    .clk, .rst_n, .in_valid(a_v), .in_ready(a_r), .in_data(a_d),
    .out_valid(b_v), .out_ready(b_r), .out_data(b_d));
  conv_layer #(.W(W/8), .H(H/8), .CIN(256), .COUT(256), .K(1), .SIMD(8), .PE(8),
               .OUT_BIAS(-(1 << (A_BITS - 1))), .LAYER(L_CONVDB)) u_convdb (
    .clk, .rst_n, .in_valid(b_v), .in_ready(b_r), .in_data(b_d),
    .out_valid, .out_ready, .out_data, .wgt, .thr);

endmodule
