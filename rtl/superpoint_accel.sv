// superpoint_accel -- streaming accelerator for the 3-bit quantised
// SuperPoint network (shared encoder plus interest-point and descriptor
// heads), one hardware stage per network layer, all stages running at once on
// successive parts of the image.
//
// Data path: 8-bit greyscale pixels in raster order -> sp_encoder
// (128 x W/8 x H/8, 3-bit) -> stream_dup -> two width converters (16 -> 8
// channels per word) -> sp_detector_head (65 signed 3-bit logits per 8x8
// cell) and sp_descriptor_head (256 signed 3-bit values per cell). The two
// result streams leave through separate ports, as they would go to the host's
// memory through DMA engines; the post-processing (Softmax, reshape,
// non-maximum suppression, descriptor normalisation and interpolation) is done
// by the consumer of these streams.
//
// Configuration: before the first frame the host writes every weight row
// (wgt) and every threshold (thr) of the twelve layers; both ports address a
// layer by its sp_pkg::layer_id_e number.
//
// Timing: every port is a valid/ready stream. With the default folding the
// slowest layers need ~5.53 M clocks per 640x480 frame, which is 54 frames/s
// at 300 MHz. The folding is this design's choice; the network, the bit widths
// and the frame size follow the paper.
module superpoint_accel
  import sp_pkg::*;
#(
  parameter int unsigned W = IMG_W,
  parameter int unsigned H = IMG_H
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // image stream
  input  logic                 pix_valid,
  output logic                 pix_ready,
  input  logic [PIX_BITS-1:0]  pix_data,
  // interest-point logits: 13 words of 5 per cell
  output logic                 semi_valid,
  input  logic                 semi_ready,
  output logic [5*A_BITS-1:0]  semi_data,
  // coarse descriptors: 32 words of 8 per cell
  output logic                 desc_valid,
  input  logic                 desc_ready,
  output logic [8*A_BITS-1:0]  desc_data,
  // parameter load
  input  wgt_wr_t              wgt,
  input  thr_wr_t              thr
);
  localparam int unsigned B = A_BITS;
  logic e_v, e_r;   logic [16*B-1:0] e_d;
  logic d0_v, d0_r; logic [16*B-1:0] d0_d;
  logic d1_v, d1_r; logic [16*B-1:0] d1_d;
  logic p_v, p_r;   logic [8*B-1:0]  p_d;
  logic q_v, q_r;   logic [8*B-1:0]  q_d;

  sp_encoder #(.W(W), .H(H)) u_enc (
    .clk, .rst_n, .in_valid(pix_valid), .in_ready(pix_ready), .in_data(pix_data),
    .out_valid(e_v), .out_ready(e_r), .out_data(e_d), .wgt, .thr);

  stream_dup #(.DW(16*B)) u_dup (
    .clk, .rst_n, .in_valid(e_v), .in_ready(e_r), .in_data(e_d),
    .out0_valid(d0_v), .out0_ready(d0_r), .out0_data(d0_d),
    .out1_valid(d1_v), .out1_ready(d1_r), .out1_data(d1_d));

  stream_dwc #(.IN_N(16), .OUT_N(8), .BITS(B)) u_dwc_p (
    .clk, .rst_n, .in_valid(d0_v), .in_ready(d0_r), .in_data(d0_d),
    .out_valid(p_v), .out_ready(p_r), .out_data(p_d));
  stream_dwc #(.IN_N(16), .OUT_N(8), .BITS(B)) u_dwc_d (
    .clk, .rst_n, .in_valid(d1_v), .in_ready(d1_r), .in_data(d1_d),
    .out_valid(q_v), .out_ready(q_r), .out_data(q_d));

  sp_detector_head #(.W(W), .H(H)) u_det (
    .clk, .rst_n, .in_valid(p_v), .in_ready(p_r), .in_data(p_d),
    .out_valid(semi_valid), .out_ready(semi_ready), .out_data(semi_data), .wgt, .thr);

  sp_descriptor_head #(.W(W), .H(H)) u_desc (
    .clk, .rst_n, .in_valid(q_v), .in_ready(q_r), .in_data(q_d),
    .out_valid(desc_valid), .out_ready(desc_ready), .out_data(desc_data), .wgt, .thr);

endmodule
